// tb_host_settings: the host panels' slider settings, run on the Test-Jig at
// its default parameters (50 MHz clock).
//
// Event test: every trigger rate position (10 Hz, 100 Hz, 500 Hz, 1 kHz,
// 2 kHz = 5,000,000 .. 25,000 cycles) with 2 events each, and every delay
// position (200 ns, 500 ns, 800 ns, 1 us, 1.5 us = 10, 25, 40, 50, 75 cycles)
// at 2 kHz, with the widths this clock can make (20 ns = 1 cycle, and 60 ns =
// 3 cycles for the 50 ns position). Monitoring test: every width position
// (20 .. 100 ns = 1 .. 5 cycles) with every count position (50 .. 250).
// rpc_daq_model plays the RPC-DAQ; each event's latched pattern, its
// hit-to-trigger delay, the event spacing and every strip's pulse count are
// checked against the command.
module tb_host_settings;
  import tj_pkg::*;
  import tb_pkt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;
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

  testjig_top dut (.*);

  rpc_daq_model u_daq (.clk, .strips(strip_out), .trig(trig_out), .gclk(gclk_out),
                       .pps(pps_out), .fold(fold_in));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  // Trigger rising edges, for the event spacing.
  longint trig_rise [$];
  logic trig_prev = 1'b0;
  always @(posedge clk) begin
    if (rst_n && trig_out && !trig_prev) trig_rise.push_back(cyc);
    trig_prev <= trig_out;
  end

  task automatic send(input bytes_t q);
    foreach (q[i]) begin
      @(negedge clk);
      rx_valid = 1'b1;
      rx_data  = q[i];
    end
    @(negedge clk);
    rx_valid = 1'b0;
  endtask

  task automatic run_event(input int u, input int w, input int t);
    logic [127:0] z = rand128();
    int ok = 1;
    u_daq.clear_counts();
    trig_rise.delete();
    send(event_pkt(32'd2, z, 32'(u), 16'(w), 16'(t), 1'b0));
    while (!test_done) @(negedge clk);
    repeat (4) @(negedge clk);
    check(u_daq.ev_pat.size() == 2, $sformatf("U=%0d: %0d events", u, u_daq.ev_pat.size()));
    foreach (u_daq.ev_pat[i]) if (u_daq.ev_pat[i] != z || u_daq.ev_dly[i] != t) ok = 0;
    check(ok == 1, $sformatf("U=%0d W=%0d T=%0d: pattern and delay", u, w, t));
    check(trig_rise.size() == 2 && trig_rise[1] - trig_rise[0] == u, $sformatf("U=%0d: event spacing", u));
  endtask

  task automatic run_mon(input int y, input int w);
    logic [127:0] z = rand128();
    int ok = 1;
    u_daq.clear_counts();
    send(mon_pkt(16'(y), z, 16'(w), 1'b0));
    while (!test_done) @(negedge clk);
    repeat (4) @(negedge clk);
    for (int i = 0; i < 128; i++) if (u_daq.mon_cnt[i] != (z[i] ? w : 0)) ok = 0;
    check(ok == 1, $sformatf("Y=%0d W=%0d: counts", y, w));
  endtask

  initial begin
    int rates [5] = '{5_000_000, 500_000, 100_000, 50_000, 25_000};
    int delays [5] = '{10, 25, 40, 50, 75};
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (4) @(negedge clk);
    foreach (rates[i]) run_event(rates[i], 1, 10);
    foreach (delays[i]) run_event(25_000, 3, delays[i]);
    for (int y = 1; y <= 5; y++)
      for (int w = 50; w <= 250; w += 50) run_mon(y, w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
