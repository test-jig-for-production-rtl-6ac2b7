// tb_mon_gen: self-checking test of the Monitoring test pulse generator.
//
// For random pulse counts W, widths Y and strip masks Z it compares the strip
// lines cycle by cycle with a reference (pulse period 2Y, high for Y cycles,
// first pulse two edges after start), counts the rising edges on every strip
// as the RPC-DAQ's rate counters would and checks them against W for the
// selected strips and 0 for the others, and checks that the run lasts 2*Y*W
// cycles. Y = 0 must behave as Y = 1 and W = 0 must end at once.
module tb_mon_gen;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  mon_cfg_t cfg = '0;
  logic [127:0] strips;
  logic busy, done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mon_gen dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int w, input int y);
    int ye, total;
    int cnt [128];
    logic [127:0] z, prev;
    bit bad_s, bad_d, bad_c;
    z = rand128();
    ye = (y == 0) ? 1 : y;
    total = 2 * ye * w;
    @(negedge clk);
    cfg = '{y_width: 16'(y), z_strips: z, w_count: 16'(w)};
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cfg = '0;
    if (w == 0) begin
      check(done && !busy, "W=0 ends at once");
      return;
    end
    foreach (cnt[i]) cnt[i] = 0;
    prev = '0; bad_s = 0; bad_d = 0; bad_c = 0;
    for (int j = 1; j <= total + 3; j++) begin
      int k = j - 1;
      @(negedge clk);
      if (strips !== ((k < total && (k % (2 * ye)) < ye) ? z : '0)) bad_s = 1;
      if (done !== (j == total)) bad_d = 1;
      for (int i = 0; i < 128; i++) if (strips[i] && !prev[i]) cnt[i]++;
      prev = strips;
    end
    for (int i = 0; i < 128; i++) if (cnt[i] != (z[i] ? w : 0)) bad_c = 1;
    check(!bad_s, $sformatf("strip waveform w=%0d y=%0d", w, y));
    check(!bad_d, $sformatf("done after %0d cycles", total));
    check(!bad_c, $sformatf("pulse counts per strip w=%0d y=%0d", w, y));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(50, 1);                  // the host panel's smallest count
    run(3, 0);                   // Y = 0 acts as 1
    run(0, 4);                   // W = 0
    run(250, 5);                 // the host panel's largest count
    for (int n = 0; n < 10; n++) run($urandom_range(1, 40), $urandom_range(1, 12));
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
