// event_gen: pattern source of the Event test.
//
// In the Event test the Test-Jig plays a detector event X times: each event
// drives the programmed strip hit pattern Z0-Z127 onto the 128 strip lines for
// a width of W clock cycles, and a global trigger follows T cycles after the
// hit's leading edge. Events repeat with a period of U cycles (the trigger
// rate of the host's Event test panel). X, U, W, T and Z are the fields of the
// Event test command; that the jig plays X events of pattern Z, with width W,
// hit-to-trigger delay T and rate U, is the paper's. Counting all times in
// system clock cycles, the trigger pulse length TRIG_W and the rule that U is
// lengthened to max(W, T+TRIG_W)+1 when it is too short to hold one whole
// event are this design's choices.
//
// How it works: one cycle counter runs from 0 to period-1 per event; strips
// are Z while the counter is below W, the trigger is high while it lies in
// [T, T+TRIG_W). An event counter stops the run after X events (X = 0 ends at
// once). Outputs are registered, so trigger-to-hit alignment is exact.
//
// Interface: start (one cycle, with cfg) begins a run; busy is high during the
// run; done pulses one cycle at its end. A start while busy is ignored.
module event_gen
  import tj_pkg::*;
#(
  parameter int unsigned TRIG_W = 5        // trigger pulse length, cycles (100 ns at 50 MHz)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  event_cfg_t        cfg,
  output logic [NSTRIP-1:0] strips,
  output logic              trig,
  output logic              busy,
  output logic              done
);

  event_cfg_t  cfg_q;
  logic [31:0] cyc_q, ev_q, period_q;

  // Shortest period that holds both the hit and the whole trigger pulse.
  function automatic logic [31:0] min_period(input event_cfg_t c);
    logic [31:0] need;
    need = 32'(c.t_delay) + 32'(TRIG_W);
    if (32'(c.w_width) > need) need = 32'(c.w_width);
    return need + 32'd1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q    <= '0;
      cyc_q    <= '0;
      ev_q     <= '0;
      period_q <= '0;
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
          period_q <= (cfg.u_period < min_period(cfg)) ? min_period(cfg) : cfg.u_period;
          cyc_q    <= '0;
          ev_q     <= '0;
          if (cfg.x_events == 32'd0) done <= 1'b1;
          else                       busy <= 1'b1;
        end
      end else begin
        strips <= (cyc_q < 32'(cfg_q.w_width)) ? cfg_q.z_pattern : '0;
        trig   <= (cyc_q >= 32'(cfg_q.t_delay)) &&
                  (cyc_q <  32'(cfg_q.t_delay) + 32'(TRIG_W));
        if (cyc_q == period_q - 32'd1) begin
          cyc_q <= '0;
          ev_q  <= ev_q + 32'd1;
          if (ev_q == cfg_q.x_events - 32'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          cyc_q <= cyc_q + 32'd1;
        end
      end
    end
  end

endmodule
