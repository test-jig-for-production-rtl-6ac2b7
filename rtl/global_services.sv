// global_services: the Test-Jig side of the RPC-DAQ global services link.
//
// In the ICAL detector every RPC-DAQ receives a 10 MHz clock, a Pulse Per
// Second (PPS) and the global trigger from the trigger and timing system, and
// sends back its trigger primitives, the fold signals (1-, 2-, 3- and 4-fold,
// for X and for Y). The Test-Jig stands in for that system through a global
// services connector fed by TTL-to-LVDS converters. That this link carries the
// 10 MHz clock, PPS and trigger to the RPC-DAQ and brings the eight fold
// signals back is the paper's. How the signals are made here is this design's
// choice:
//   * 10 MHz is the system clock divided by CLK_HZ/GCLK_HZ (5 at 50 MHz), high
//     for the first half of the division rounded down (2 of 5 cycles);
//   * PPS is high for PPS_WIDTH cycles once every CLK_HZ cycles; both come from
//     counters reset together, so every PPS rising edge falls on a 10 MHz
//     rising edge;
//   * the trigger from the pattern generators is re-registered onto the pin;
//   * each fold input passes a two-flop synchroniser, and its rising edges are
//     counted in a 32-bit counter, cleared by fold_clr (start of a test).
//
// Timing: trig_out follows trig_in by one cycle; fold counts lag the pin by
// three cycles.
module global_services
  import tj_pkg::*;
#(
  parameter int unsigned CLK_HZ    = 50_000_000,
  parameter int unsigned GCLK_HZ   = 10_000_000,
  parameter int unsigned PPS_WIDTH = 50            // 1 us at 50 MHz
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trig_in,
  output logic             trig_out,
  output logic             gclk_out,
  output logic             pps_out,
  input  logic [NFOLD-1:0] fold_in,
  input  logic             fold_clr,
  output logic [NFOLD-1:0] fold_level,
  output logic [31:0]      fold_cnt [NFOLD]
);

  localparam int unsigned DIV = CLK_HZ / GCLK_HZ;

  logic [$clog2(DIV+1)-1:0]    div_q;
  logic [$clog2(CLK_HZ+1)-1:0] sec_q;
  logic [NFOLD-1:0]            sync1_q, sync2_q, prev_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_q    <= '0;
      sec_q    <= '0;
      gclk_out <= 1'b0;
      pps_out  <= 1'b0;
      trig_out <= 1'b0;
    end else begin
      div_q    <= (div_q == ($bits(div_q))'(DIV - 1)) ? '0 : div_q + 1'b1;
      sec_q    <= (sec_q == ($bits(sec_q))'(CLK_HZ - 1)) ? '0 : sec_q + 1'b1;
      gclk_out <= (div_q < ($bits(div_q))'(DIV / 2));
      pps_out  <= (sec_q < ($bits(sec_q))'(PPS_WIDTH));
      trig_out <= trig_in;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1_q <= '0;
      sync2_q <= '0;
      prev_q  <= '0;
      for (int i = 0; i < int'(NFOLD); i++) fold_cnt[i] <= '0;
    end else begin
      sync1_q <= fold_in;
      sync2_q <= sync1_q;
      prev_q  <= sync2_q;
      for (int i = 0; i < int'(NFOLD); i++) begin
        if (fold_clr)                     fold_cnt[i] <= '0;
        else if (sync2_q[i] && !prev_q[i]) fold_cnt[i] <= fold_cnt[i] + 32'd1;
      end
    end
  end

  assign fold_level = sync2_q;

endmodule
