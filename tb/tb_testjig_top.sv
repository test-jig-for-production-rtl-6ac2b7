// tb_testjig_top: end-to-end test of the Test-Jig firmware.
//
// The host side is played by byte-level tasks that send command packets and
// collect acknowledgements; the device side by rpc_daq_model. With the second
// shortened to 2000 cycles (so PPS is seen several times) and a 40-cycle
// cross talk hit period, it runs
//   * an Event test with acknowledgement: every event the model latches must
//     equal the pattern Z, X events in all, each trigger T cycles after the
//     hit's leading edge; a Monitoring command sent meanwhile must be refused
//     "busy"; the jig's fold counters must match the model's fold edges;
//   * a corrupted packet (bad checksum) and an unknown Command ID, both
//     refused with the right status;
//   * a Monitoring test without acknowledgement: no reply, and every selected
//     strip counted W times, the others never;
//   * a Cross talk test: 128*X events, each with exactly one strip, channel
//     0 first, X events per channel, trigger D cycles after the hit;
//   * the 10 MHz clock and PPS as seen by the model.
// Each mechanism is counted, and one that never happened counts a failure.
module tb_testjig_top;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  localparam int HZ = 2000, GHZ = 400, XTP = 40;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;         // power-on reset edge
  logic rx_valid = 1'b0, tx_valid, tx_ready = 1'b1;
  logic [7:0] rx_data = '0, tx_data;
  logic [127:0] strip_out;
  logic trig_out, gclk_out, pps_out;
  logic [7:0] fold_in, fold_level;
  logic [31:0] fold_cnt [8];
  logic test_running, test_done;
  logic [6:0] xt_channel;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #10 clk = ~clk;
  always @(posedge clk) cyc++;

  testjig_top #(.CLK_HZ(HZ), .GCLK_HZ(GHZ), .PPS_WIDTH(5), .XT_HIT_PERIOD(XTP)) dut (.*);

  rpc_daq_model u_daq (.clk, .strips(strip_out), .trig(trig_out), .gclk(gclk_out),
                       .pps(pps_out), .fold(fold_in));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // Host side.
  byte unsigned rx_q [$];
  always @(posedge clk) if (tx_valid && tx_ready) rx_q.push_back(tx_data);

  task automatic send(input bytes_t q);
    foreach (q[i]) begin
      @(negedge clk);
      rx_valid = 1'b1;
      rx_data  = q[i];
    end
    @(negedge clk);
    rx_valid = 1'b0;
  endtask

  // Waits up to 40 cycles for one 9-byte reply; checks its framing.
  task automatic get_reply(output bit got, output byte unsigned id, output byte unsigned st);
    byte unsigned s;
    got = 0; id = 0; st = 0;
    for (int i = 0; i < 40 && rx_q.size() < 9; i++) @(negedge clk);
    if (rx_q.size() < 9) return;
    got = 1;
    s = rx_q[0] + rx_q[1] + rx_q[2] + rx_q[3] + rx_q[4] + rx_q[5];
    check(rx_q[0] == 8'hAA && rx_q[1] == 8'h55 && rx_q[2] == 0 && rx_q[3] == 9 &&
          rx_q[6] == s && rx_q[7] == 8'h55 && rx_q[8] == 8'hAA, "reply framing");
    id = rx_q[4]; st = rx_q[5];
    repeat (9) void'(rx_q.pop_front());
  endtask

  task automatic wait_done();
    while (!test_done) @(negedge clk);
    repeat (6) @(negedge clk);
  endtask

  int n_event = 0, n_mon = 0, n_xtalk = 0, n_busy = 0, n_badcks = 0, n_badcmd = 0,
      n_silent = 0, n_pps = 0, n_fold = 0;

  initial begin
    bit got; byte unsigned id, st;
    logic [127:0] z;
    bytes_t q;
    int ok;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);
    rx_q.delete();                 // bytes seen before reset took hold

    // ---- Event test: X=4, U=120, W=6, T=20, with acknowledgement ----
    z = rand128();
    u_daq.clear_counts();
    send(event_pkt(32'd4, z, 32'd120, 16'd6, 16'd20, 1'b1));
    get_reply(got, id, st);
    check(got && id == 8'h01 && st == 8'h00, "event accepted");
    check(test_running, "event test running");
    send(mon_pkt(16'd2, rand128(), 16'd5, 1'b1));
    get_reply(got, id, st);
    check(got && id == 8'h02 && st == 8'h01, "monitoring refused while busy");
    if (got && st == 8'h01) n_busy++;
    wait_done();
    check(u_daq.ev_pat.size() == 4, $sformatf("event count %0d", u_daq.ev_pat.size()));
    ok = 1;
    foreach (u_daq.ev_pat[i]) if (u_daq.ev_pat[i] != z || u_daq.ev_dly[i] != 20) ok = 0;
    check(ok == 1, "latched patterns and hit-to-trigger delay");
    if (ok == 1 && u_daq.ev_pat.size() == 4) n_event++;
    for (int i = 0; i < 8; i++) begin
      check(fold_cnt[i] == 32'(u_daq.fold_edges[i]),
            $sformatf("fold %0d: jig %0d model %0d", i, fold_cnt[i], u_daq.fold_edges[i]));
      if (fold_cnt[i] != 0) n_fold++;
    end

    // ---- Refusals ----
    q = xtalk_pkt(16'd1, 16'd2, 16'd3, 1'b0);
    q[q.size() - 3] ^= 8'h40;
    send(q);
    get_reply(got, id, st);
    check(got && st == 8'h02, "bad checksum refused");
    if (got && st == 8'h02) n_badcks++;
    q = xtalk_pkt(16'd1, 16'd2, 16'd3, 1'b0);
    q[4] = 8'h09;
    q[q.size() - 3] = q[q.size() - 3] + 8'h06;
    send(q);
    get_reply(got, id, st);
    check(got && id == 8'h09 && st == 8'h03, "unknown command refused");
    if (got && st == 8'h03) n_badcmd++;
    check(!test_running, "refused commands start nothing");

    // ---- Monitoring test: Y=3, W=20, no acknowledgement ----
    z = rand128();
    u_daq.clear_counts();
    send(mon_pkt(16'd3, z, 16'd20, 1'b0));
    get_reply(got, id, st);
    check(!got, "no reply without R_Ack");
    if (!got) n_silent++;
    wait_done();
    ok = 1;
    for (int i = 0; i < 128; i++) if (u_daq.mon_cnt[i] != (z[i] ? 20 : 0)) ok = 0;
    check(ok == 1, "monitoring counts per strip");
    check(u_daq.ev_pat.size() == 0, "no trigger in monitoring test");
    if (ok == 1) n_mon++;

    // ---- Cross talk test: X=2, D=8, W=3 ----
    u_daq.clear_counts();
    send(xtalk_pkt(16'd2, 16'd8, 16'd3, 1'b1));
    get_reply(got, id, st);
    check(got && id == 8'h03 && st == 8'h00, "cross talk accepted");
    wait_done();
    check(u_daq.ev_pat.size() == 256, $sformatf("cross talk events %0d", u_daq.ev_pat.size()));
    ok = 1;
    foreach (u_daq.ev_pat[i])
      if (u_daq.ev_pat[i] != (128'd1 << (i / 2)) || u_daq.ev_dly[i] != 8) ok = 0;
    check(ok == 1, "one channel per event, in order, delay D");
    if (ok == 1 && u_daq.ev_pat.size() == 256) n_xtalk++;

    // ---- Global clock and PPS ----
    while (cyc < 3 * HZ) @(negedge clk);
    n_pps = u_daq.pps_edges;
    check(n_pps >= int'(cyc / HZ) - 1 && n_pps <= int'(cyc / HZ) + 1, $sformatf("PPS edges %0d", n_pps));
    check(u_daq.gclk_edges >= int'(cyc / 5) - 3 && u_daq.gclk_edges <= int'(cyc / 5) + 1,
          $sformatf("10 MHz edges %0d in %0d cycles", u_daq.gclk_edges, cyc));

    $display("mechanisms: event=%0d mon=%0d xtalk=%0d busy=%0d bad_cks=%0d bad_cmd=%0d silent=%0d pps=%0d fold_lines=%0d",
             n_event, n_mon, n_xtalk, n_busy, n_badcks, n_badcmd, n_silent, n_pps, n_fold);
    check(n_event > 0, "event test happened");
    check(n_mon > 0, "monitoring test happened");
    check(n_xtalk > 0, "cross talk test happened");
    check(n_busy > 0, "busy refusal happened");
    check(n_badcks > 0, "checksum refusal happened");
    check(n_badcmd > 0, "unknown command refusal happened");
    check(n_silent > 0, "unacknowledged command happened");
    check(n_pps > 0, "PPS happened");
    check(n_fold > 0, "fold counting happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
