// xtalk_gen: pattern source of the Cross talk test.
//
// To show that the 128 strip inputs of the RPC-DAQ are free of cross talk,
// the Test-Jig drives one channel at a time: X hits of width W, each followed
// D cycles after its leading edge by a trigger, first on channel 0, then on
// channel 1, and so on to the last channel. The host checks each event for
// hits on any other channel. X, D, W and the loop over all channels are the
// paper's. The hit period is not given: it is the parameter HIT_PERIOD
// (default 50,000 cycles = 1 ms at 50 MHz), lengthened to max(W, D+TRIG_W)+1
// if it is too short; the trigger length TRIG_W is also this design's choice.
//
// How it works: a cycle counter per hit, a hit counter per channel and a
// channel counter; strips carry a one-hot of the channel while the cycle
// counter is below W, the trigger is high in [D, D+TRIG_W). X = 0 ends at once.
//
// Interface: start (one cycle, with cfg) begins a run; busy high during it;
// done pulses one cycle at its end; chan shows the channel being driven.
module xtalk_gen
  import tj_pkg::*;
#(
  parameter int unsigned TRIG_W     = 5,
  parameter int unsigned HIT_PERIOD = 50_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  xtalk_cfg_t        cfg,
  output logic [NSTRIP-1:0] strips,
  output logic              trig,
  output logic [6:0]        chan,
  output logic              busy,
  output logic              done
);

  xtalk_cfg_t  cfg_q;
  logic [31:0] cyc_q, period_q;
  logic [15:0] hit_q;

  function automatic logic [31:0] period_of(input xtalk_cfg_t c);
    logic [31:0] need;
    need = 32'(c.d_delay) + 32'(TRIG_W);
    if (32'(c.w_width) > need) need = 32'(c.w_width);
    need = need + 32'd1;
    return (32'(HIT_PERIOD) < need) ? need : 32'(HIT_PERIOD);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q    <= '0;
      cyc_q    <= '0;
      period_q <= '0;
      hit_q    <= '0;
      chan     <= '0;
      busy     <= 1'b0;
      done     <= 1'b0;
      strips   <= '0;
      trig     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        strips <= '0;
        trig   <= 1'b0;
        if (start) begin
          cfg_q    <= cfg;
          period_q <= period_of(cfg);
          cyc_q    <= '0;
          hit_q    <= '0;
          chan     <= '0;
          if (cfg.x_hits == 16'd0) done <= 1'b1;
          else                     busy <= 1'b1;
        end
      end else begin
        strips <= (cyc_q < 32'(cfg_q.w_width)) ? (NSTRIP'(1) << chan) : '0;
        trig   <= (cyc_q >= 32'(cfg_q.d_delay)) &&
                  (cyc_q <  32'(cfg_q.d_delay) + 32'(TRIG_W));
        if (cyc_q == period_q - 32'd1) begin
          cyc_q <= '0;
          if (hit_q == cfg_q.x_hits - 16'd1) begin
            hit_q <= '0;
            chan  <= chan + 7'd1;
            if (chan == 7'(NSTRIP - 1)) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            hit_q <= hit_q + 16'd1;
          end
        end else begin
          cyc_q <= cyc_q + 32'd1;
        end
      end
    end
  end

endmodule
