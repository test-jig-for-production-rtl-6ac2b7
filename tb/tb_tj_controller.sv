// tb_tj_controller: self-checking test of the command dispatcher.
//
// Presents parsed commands directly (no parser) and plays the generators'
// done pulses itself. Checks: an accepted command starts exactly its own
// generator one cycle after pkt_valid and clears the fold counters; a command
// arriving while a test runs is answered "busy" and starts nothing; bad
// checksum and unknown command are always answered, good commands only when
// R_Ack is set; the response waits until resp_ready; running falls and
// test_done pulses after the active generator's done; strips and trigger are
// the OR of the generators' outputs.
module tb_tj_controller;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pkt_valid = 1'b0, cks_ok = 1'b0, id_ok = 1'b0;
  command_t pkt = '0;
  logic start_ev, start_mon, start_xt;
  event_cfg_t ev_cfg; mon_cfg_t mon_cfg; xtalk_cfg_t xt_cfg;
  logic ev_done = 0, mon_done = 0, xt_done = 0;
  logic [127:0] ev_strips = '0, mon_strips = '0, xt_strips = '0, strips;
  logic ev_trig = 0, xt_trig = 0, trig, fold_clr, running, test_done;
  logic resp_req, resp_ready = 1'b1;
  logic [7:0] resp_cmd;
  status_e resp_status;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tj_controller dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Presents one command; returns the start vector seen one cycle later and
  // whether a response was requested, with its contents.
  task automatic present(input logic [7:0] id, input bit ck, input bit ik, input bit rack,
                         output logic [2:0] starts, output bit resp, output logic [7:0] rc,
                         output logic [7:0] rs, output bit fclr);
    @(negedge clk);
    pkt = '0;
    pkt.cmd_id = id; pkt.r_ack = rack;
    pkt.ev.z_pattern = rand128(); pkt.mon.w_count = 16'($urandom()); pkt.xt.x_hits = 16'($urandom());
    cks_ok = ck; id_ok = ik; pkt_valid = 1'b1;
    @(negedge clk);
    pkt_valid = 1'b0;
    starts = {start_ev, start_mon, start_xt};
    resp = resp_req; rc = resp_cmd; rs = resp_status; fclr = fold_clr;
    if (start_ev)  check(ev_cfg  == pkt.ev,  "event cfg passed on");
    if (start_mon) check(mon_cfg == pkt.mon, "mon cfg passed on");
    if (start_xt)  check(xt_cfg  == pkt.xt,  "xtalk cfg passed on");
  endtask

  task automatic finish_gen(input int which);
    @(negedge clk);
    check(running, "running before done");
    if (which == 0) ev_done = 1; else if (which == 1) mon_done = 1; else xt_done = 1;
    @(negedge clk);
    ev_done = 0; mon_done = 0; xt_done = 0;
    check(!running && test_done, "running falls, test_done pulses");
    @(negedge clk);
    check(!test_done, "test_done one cycle");
  endtask

  initial begin
    logic [2:0] st; bit r, f; logic [7:0] rc, rs;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Each test accepted from idle, with and without R_Ack.
    for (int n = 0; n < 6; n++) begin
      int which = n % 3;
      bit rack = (n < 3);
      present(8'(which + 1), 1, 1, rack, st, r, rc, rs, f);
      check(st == (3'b100 >> which), $sformatf("start of test %0d", which));
      check(f, "fold counters cleared at start");
      check(r == rack, "response only with R_Ack");
      if (r) check(rc == 8'(which + 1) && rs == ST_ACCEPTED, "accepted response");
      // Same command while running: busy.
      present(8'(which + 1), 1, 1, 1, st, r, rc, rs, f);
      check(st == 3'b000 && r && rs == ST_BUSY, "busy while running");
      present(8'h02, 1, 1, 0, st, r, rc, rs, f);
      check(st == 3'b000 && !r, "busy without R_Ack is silent");
      finish_gen(which);
    end
    // Rejections are always answered.
    present(8'h01, 0, 1, 0, st, r, rc, rs, f);
    check(st == 0 && r && rs == ST_BAD_CKS && !f, "bad checksum refused");
    present(8'h44, 1, 0, 0, st, r, rc, rs, f);
    check(st == 0 && r && rs == ST_BAD_CMD && rc == 8'h44, "unknown command refused");
    check(!running, "nothing running after refusals");
    // Response held until resp_ready.
    @(negedge clk);                // let the last refusal's response go
    resp_ready = 1'b0;
    present(8'h03, 1, 1, 1, st, r, rc, rs, f);
    repeat (5) @(negedge clk);
    check(resp_req && resp_cmd == 8'h03, $sformatf("response held %0b %h r=%0b", resp_req, resp_cmd, r));
    resp_ready = 1'b1;
    @(negedge clk);
    check(!resp_req, "response released");
    finish_gen(2);
    // Output merge.
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      ev_strips = rand128(); mon_strips = rand128(); xt_strips = rand128();
      ev_trig = 1'($urandom()); xt_trig = 1'($urandom());
      #1;
      check(strips == (ev_strips | mon_strips | xt_strips) && trig == (ev_trig | xt_trig), "strip/trigger merge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
