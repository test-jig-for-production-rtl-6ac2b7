// mon_gen: pulse source of the Monitoring test.
//
// The RPC-DAQ counts the pulses arriving on every strip to monitor detector
// health. In the Monitoring test the Test-Jig sends W pulses, each Y clock
// cycles wide, on every strip selected by the 128-bit mask Z; the host then
// compares the counts the RPC-DAQ reports with W. Pulse count W, width Y and
// strip selection Z are the paper's. The spacing of the pulses is not given:
// here each pulse is followed by a low gap as long as the pulse (period 2Y),
// and Y = 0 is treated as 1.
//
// How it works: a cycle counter runs 0..2Y-1 per pulse, strips equal Z while
// it is below Y; a pulse counter stops after W pulses (W = 0 ends at once).
//
// Interface: start (one cycle, with cfg) begins a run; busy high during it;
// done pulses one cycle at its end; a start while busy is ignored.
module mon_gen
  import tj_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  mon_cfg_t          cfg,
  output logic [NSTRIP-1:0] strips,
  output logic              busy,
  output logic              done
);

  mon_cfg_t    cfg_q;
  logic [15:0] width_q;
  logic [16:0] cyc_q;
  logic [15:0] pulse_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q   <= '0;
      width_q <= '0;
      cyc_q   <= '0;
      pulse_q <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
      strips  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        strips <= '0;
        if (start) begin
          cfg_q   <= cfg;
          width_q <= (cfg.y_width == 16'd0) ? 16'd1 : cfg.y_width;
          cyc_q   <= '0;
          pulse_q <= '0;
          if (cfg.w_count == 16'd0) done <= 1'b1;
          else                      busy <= 1'b1;
        end
      end else begin
        strips <= (cyc_q < 17'(width_q)) ? cfg_q.z_strips : '0;
        if (cyc_q == {width_q, 1'b0} - 17'd1) begin
          cyc_q   <= '0;
          pulse_q <= pulse_q + 16'd1;
          if (pulse_q == cfg_q.w_count - 16'd1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end else begin
          cyc_q <= cyc_q + 17'd1;
        end
      end
    end
  end

endmodule
