// tb_event_gen: self-checking test of the Event test pattern generator.
//
// Runs random Event configurations (including a rate U shorter than one event
// and X = 0) and compares strips, trigger, busy and done cycle by cycle with a
// reference schedule computed here: per event of period
// P = max(U, max(W, T+TRIG_W)+1), strips = Z for the first W cycles and the
// trigger is high in cycles [T, T+TRIG_W). The first event's outputs appear
// two clock edges after the start pulse; done is high in the cycle that shows
// the last event's last cycle, so a run lasts exactly X*P cycles.
module tb_event_gen;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  localparam int TW = 5;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  event_cfg_t cfg = '0;
  logic [127:0] strips;
  logic trig, busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  event_gen #(.TRIG_W(TW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int x, input int u, input int w, input int t);
    int p, need, total, hits, trigs;
    logic [127:0] z;
    bit bad_s, bad_t, bad_b, bad_d;
    z = rand128();
    need = ((w > t + TW) ? w : t + TW) + 1;
    p = (u < need) ? need : u;
    total = x * p;
    @(negedge clk);
    cfg = '{x_events: 32'(x), z_pattern: z, u_period: 32'(u), w_width: 16'(w), t_delay: 16'(t)};
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cfg = '0;                     // the generator must have latched its copy
    bad_s = 0; bad_t = 0; bad_b = 0; bad_d = 0; hits = 0; trigs = 0;
    if (x == 0) begin
      check(done && !busy, "X=0 ends at once");
    end else begin
      for (int j = 1; j <= total + 3; j++) begin
        logic [127:0] es; logic et, eb, ed;
        int k = j - 1;
        @(negedge clk);
        es = (k < total && (k % p) < w) ? z : '0;
        et = (k < total && (k % p) >= t && (k % p) < t + TW);
        eb = (j < total);
        ed = (j == total);
        if (strips !== es) bad_s = 1;
        if (trig !== et) bad_t = 1;
        if (busy !== eb) bad_b = 1;
        if (done !== ed) bad_d = 1;
        if (k < total && (k % p) == 0) hits++;
        if (k < total && (k % p) == t) trigs++;
      end
      check(!bad_s, $sformatf("strips x=%0d u=%0d w=%0d t=%0d", x, u, w, t));
      check(!bad_t, $sformatf("trigger x=%0d u=%0d w=%0d t=%0d", x, u, w, t));
      check(!bad_b, $sformatf("busy x=%0d u=%0d w=%0d t=%0d", x, u, w, t));
      check(!bad_d, $sformatf("done timing (run of %0d cycles)", total));
      check(hits == x && trigs == x, "event count");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(3, 40, 4, 10);
    run(1, 0, 7, 2);           // U too short: period lengthened
    run(2, 10, 20, 3);         // W longer than T+TRIG_W
    run(0, 50, 4, 4);          // X = 0
    run(4, 25, 1, 0);          // trigger with the hit's leading edge
    for (int n = 0; n < 20; n++)
      run($urandom_range(1, 5), $urandom_range(0, 80), $urandom_range(1, 30), $urandom_range(0, 40));
    // A start while busy is ignored: the run keeps its first configuration.
    @(negedge clk);
    cfg = '{x_events: 32'd2, z_pattern: 128'hF0, u_period: 32'd30, w_width: 16'd3, t_delay: 16'd5};
    start = 1'b1;
    @(negedge clk);
    cfg.z_pattern = 128'h0F;
    repeat (5) @(negedge clk);
    start = 1'b0;
    // second event of the run
    while (strips == '0) @(negedge clk);
    check(strips == 128'hF0, "start while busy ignored");
    wait (!busy);
    repeat (3) @(negedge clk);
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
