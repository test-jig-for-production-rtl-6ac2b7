// tb_xtalk_gen: self-checking test of the Cross talk test pattern generator.
//
// With a short hit period (HIT_PERIOD overridden to 20 cycles) it runs the
// loop over all 128 channels for several X, D and W and compares strips,
// trigger and done cycle by cycle with a reference: hit h of channel c starts
// at cycle (c*X + h)*P, the strips carry only bit c for W cycles and the
// trigger is high D..D+TRIG_W-1 cycles after the hit's start. It also counts
// hits per channel and checks that each channel got exactly X and that no hit
// ever touched a second channel.
module tb_xtalk_gen;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  localparam int TW = 5;
  localparam int HP = 20;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  xtalk_cfg_t cfg = '0;
  logic [127:0] strips;
  logic trig, busy, done;
  logic [6:0] chan;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xtalk_gen #(.TRIG_W(TW), .HIT_PERIOD(HP)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int x, input int d, input int w);
    int p, need, total;
    int hits [128];
    bit bad_s, bad_t, bad_d, bad_h, multi;
    need = ((w > d + TW) ? w : d + TW) + 1;
    p = (HP < need) ? need : HP;
    total = 128 * x * p;
    @(negedge clk);
    cfg = '{x_hits: 16'(x), d_delay: 16'(d), w_width: 16'(w)};
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cfg = '0;
    if (x == 0) begin
      check(done && !busy, "X=0 ends at once");
      return;
    end
    foreach (hits[i]) hits[i] = 0;
    bad_s = 0; bad_t = 0; bad_d = 0; multi = 0; bad_h = 0;
    for (int j = 1; j <= total + 3; j++) begin
      int k = j - 1;
      int c = (k / p) / x;
      logic [127:0] es;
      @(negedge clk);
      es = (k < total && (k % p) < w) ? (128'd1 << c) : '0;
      if (strips !== es) bad_s = 1;
      if (trig !== (k < total && (k % p) >= d && (k % p) < d + TW)) bad_t = 1;
      if (done !== (j == total)) bad_d = 1;
      if ($countones(strips) > 1) multi = 1;
      if (k < total && (k % p) == 0) for (int i = 0; i < 128; i++) if (strips[i]) hits[i]++;
    end
    foreach (hits[i]) if (hits[i] != x) bad_h = 1;
    check(!bad_s, $sformatf("strips x=%0d d=%0d w=%0d", x, d, w));
    check(!bad_t, $sformatf("trigger x=%0d d=%0d w=%0d", x, d, w));
    check(!bad_d, "done timing");
    check(!multi, "only one channel driven at a time");
    check(!bad_h, "X hits on every channel");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1, 3, 2);
    run(2, 0, 4);
    run(3, 10, 1);
    run(1, 30, 40);              // period lengthened beyond HIT_PERIOD
    run(0, 1, 1);
    for (int n = 0; n < 3; n++) run($urandom_range(1, 3), $urandom_range(0, 12), $urandom_range(1, 12));
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
