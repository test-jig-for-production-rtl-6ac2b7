// rpc_daq_model: behavioural stand-in for the RPC-DAQ under test.
//
// Not synthesizable logic and not part of the design: a testbench model of the
// device the Test-Jig drives, reduced to what the end-to-end test observes.
//  * Event latching: every strip that was high at any time since the previous
//    trigger is remembered (a stand-in for the RPC-DAQ's pulse stretching);
//    on each trigger rising edge the remembered pattern is pushed into the
//    event queue, with the cycle distance from the hit's leading edge to the
//    trigger, and the memory is cleared; strips still high from that hit are
//    ignored until all strips are low again.
//  * Monitoring: a rising-edge counter per strip.
//  * Fold signals: n-fold X (n = 1..4) is high while at least n of strips
//    0..63 are high, likewise for Y with strips 64..127. The real fold logic
//    is the RPC-DAQ's own; this rule only gives the fold lines activity.
//  * Counts rising edges of the 10 MHz clock and of PPS.
module rpc_daq_model (
  input  logic         clk,
  input  logic [127:0] strips,
  input  logic         trig,
  input  logic         gclk,
  input  logic         pps,
  output logic [7:0]   fold
);
  logic [127:0] held = '0;
  logic         blank = 1'b0;
  logic         trig_q = 1'b0, gclk_q = 1'b0, pps_q = 1'b0;
  longint       cyc = 0, first_hit = -1;
  logic [127:0] ev_pat [$];
  longint       ev_dly [$];
  int           mon_cnt [128];
  logic [127:0] prev = '0;
  int           gclk_edges = 0, pps_edges = 0;
  int           fold_edges [8];
  logic [7:0]   fold_q = '0;

  initial begin
    foreach (mon_cnt[i]) mon_cnt[i] = 0;
    foreach (fold_edges[i]) fold_edges[i] = 0;
  end

  always_comb begin
    for (int n = 0; n < 4; n++) begin
      fold[n]     = ($countones(strips[63:0])   > n);
      fold[4 + n] = ($countones(strips[127:64]) > n);
    end
  end

  always @(posedge clk) begin
    cyc++;
    if (blank && strips == '0) blank = 1'b0;
    if (!blank) begin
      if (strips != '0 && prev == '0) first_hit = cyc;
      held = held | strips;
    end
    for (int i = 0; i < 128; i++) if (strips[i] && !prev[i]) mon_cnt[i]++;
    for (int i = 0; i < 8; i++) if (fold[i] && !fold_q[i]) fold_edges[i]++;
    if (trig && !trig_q) begin
      ev_pat.push_back(held);
      ev_dly.push_back(first_hit < 0 ? -1 : cyc - first_hit);
      held = '0;
      first_hit = -1;
      blank = (strips != '0);
    end
    if (gclk && !gclk_q) gclk_edges++;
    if (pps && !pps_q) pps_edges++;
    prev = strips; trig_q = trig; gclk_q = gclk; pps_q = pps; fold_q = fold;
  end

  function automatic void clear_counts();
    foreach (mon_cnt[i]) mon_cnt[i] = 0;
    foreach (fold_edges[i]) fold_edges[i] = 0;
    ev_pat.delete();
    ev_dly.delete();
    held = '0;
    first_hit = -1;
    blank = 1'b0;
  endfunction
endmodule
