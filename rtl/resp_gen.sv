// resp_gen: builds the acknowledgement the Test-Jig returns to the host.
//
// The host's command interface relies on handshakes for command integrity,
// and every command packet carries an R_Ack field. This design reads R_Ack as
// "acknowledge requested": the jig then answers with a short packet in the
// same framing as the commands,
//   AA 55 | 00 09 | Command ID | Status | Checksum | 55 AA
// where Status is accepted, busy, bad checksum or unknown command (tj_pkg).
// Only the existence of the handshake and of R_Ack is the paper's; the
// packet layout is this design's own.
//
// Interface: req/req_ready accept one response (cmd_id, status) when both are
// high; the packet then leaves as a byte stream tx_valid/tx_data/tx_ready,
// one byte per cycle in which tx_valid and tx_ready are both high.
module resp_gen
  import tj_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req,
  output logic       req_ready,
  input  logic [7:0] cmd_id,
  input  status_e    status,
  output logic       tx_valid,
  output logic [7:0] tx_data,
  input  logic       tx_ready
);

  logic [7:0] pkt_q [LEN_RESP];
  logic [3:0] idx_q;

  assign req_ready = !tx_valid;
  assign tx_data   = pkt_q[idx_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_valid <= 1'b0;
      idx_q    <= '0;
      for (int i = 0; i < int'(LEN_RESP); i++) pkt_q[i] <= '0;
    end else if (!tx_valid) begin
      if (req) begin
        pkt_q[0] <= HDR0;
        pkt_q[1] <= HDR1;
        pkt_q[2] <= 8'h00;
        pkt_q[3] <= 8'(LEN_RESP);
        pkt_q[4] <= cmd_id;
        pkt_q[5] <= status;
        pkt_q[6] <= HDR0 + HDR1 + 8'(LEN_RESP) + cmd_id + status;
        pkt_q[7] <= TRL0;
        pkt_q[8] <= TRL1;
        idx_q    <= '0;
        tx_valid <= 1'b1;
      end
    end else if (tx_ready) begin
      if (idx_q == 4'(LEN_RESP - 1)) tx_valid <= 1'b0;
      else                           idx_q    <= idx_q + 4'd1;
    end
  end

endmodule
