// tb_global_services: self-checking test of the global services link.
//
// With the "second" shortened to 1000 cycles (CLK_HZ=1000, GCLK_HZ=200, so the
// same divide-by-5 as 50 MHz to 10 MHz) it checks the 10 MHz clock's period
// and duty cycle, the PPS period and width and that every PPS rising edge
// coincides with a clock rising edge, the one-cycle trigger delay, and that
// random pulses on each fold input are counted exactly and cleared by
// fold_clr.
module tb_global_services;
  import tj_pkg::*;

  localparam int HZ = 1000, GHZ = 200, PW = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  logic trig_in = 1'b0, trig_out, gclk_out, pps_out;
  logic [7:0] fold_in = '0, fold_level;
  logic fold_clr = 1'b0;
  logic [31:0] fold_cnt [8];
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;

  global_services #(.CLK_HZ(HZ), .GCLK_HZ(GHZ), .PPS_WIDTH(PW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // Clock and PPS observer.
  longint g_rise [$], p_rise [$], p_fall [$];
  int g_high = 0, g_low = 0;
  logic g_prev = 1'b0, p_prev = 1'b0;
  bit pps_on_gclk = 1;
  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (gclk_out && !g_prev) g_rise.push_back(cyc);
    if (gclk_out) g_high++; else g_low++;
    if (pps_out && !p_prev) begin
      p_rise.push_back(cyc);
      if (!(gclk_out && !g_prev)) pps_on_gclk = 0;
    end
    if (!pps_out && p_prev) p_fall.push_back(cyc);
    g_prev = gclk_out;
    p_prev = pps_out;
  end

  initial begin
    int exp_cnt [8];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Trigger: follows its input by one edge.
    for (int n = 0; n < 200; n++) begin
      logic v = 1'($urandom());
      @(negedge clk);
      trig_in = v;
      @(negedge clk);
      check(trig_out == v, "trigger delay one cycle");
    end
    // Fold counting with random pulses of random widths on all eight lines.
    @(negedge clk); fold_clr = 1'b1; @(negedge clk); fold_clr = 1'b0;
    foreach (exp_cnt[i]) exp_cnt[i] = 0;
    for (int n = 0; n < 300; n++) begin
      logic [7:0] nv = 8'($urandom());
      for (int i = 0; i < 8; i++) if (nv[i] && !fold_in[i]) exp_cnt[i]++;
      fold_in = nv;
      repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    fold_in = '0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < 8; i++)
      check(fold_cnt[i] == 32'(exp_cnt[i]), $sformatf("fold %0d count %0d exp %0d", i, fold_cnt[i], exp_cnt[i]));
    fold_in = 8'h5A;
    repeat (4) @(negedge clk);
    check(fold_level == 8'h5A, "fold level synchronised");
    fold_clr = 1'b1; @(negedge clk); fold_clr = 1'b0;
    for (int i = 0; i < 8; i++) check(fold_cnt[i] == 0, "fold counters cleared");
    // Let three PPS periods pass.
    while (p_rise.size() < 4) @(negedge clk);
    for (int i = 1; i < p_rise.size(); i++) check(p_rise[i] - p_rise[i-1] == HZ, "PPS period");
    for (int i = 1; i < p_fall.size(); i++) if (p_fall[i] > p_rise[i]) check(p_fall[i] - p_rise[i] == PW, "PPS width");
    for (int i = 1; i < g_rise.size(); i++) if (g_rise[i] - g_rise[i-1] != HZ / GHZ) begin
      check(0, "10 MHz period"); break;
    end
    check(g_rise.size() > 100, "10 MHz clock running");
    check(g_high * 3 > g_low * 2 - 10 && g_high * 3 < g_low * 2 + 10, "10 MHz duty 2 of 5");
    check(pps_on_gclk, "PPS aligned to 10 MHz rising edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
