// cmd_parser: turns the byte stream of a UDP command payload into a command.
//
// The host application sends each test command to the Test-Jig as one UDP
// packet: Header, Size, Command ID, the test's fields, R_Ack, Checksum,
// Trailer (field order as in the paper's packet figures for the Event,
// Monitoring and Cross talk tests). The Ethernet controller's socket buffer
// delivers the payload bytes here, one byte per cycle while rx_valid is high.
//
// How it works: a small state machine hunts for the two header bytes, reads
// the 16-bit Size, and stores the bytes of the packet in a buffer at their
// byte offsets while it sums them. After the last byte (offset Size-1) it
// checks, one cycle later, the trailer and the checksum (8-bit sum of every
// byte before the checksum) and whether the Command ID is known and its Size
// matches that command's fixed length. The fields are then read out at fixed
// offsets. A Size outside 9..MAXLEN makes the parser drop the packet and hunt
// for the next header.
//
// Interface: rx_valid/rx_data in; pkt_valid pulses for one cycle with pkt
// (the decoded command), cks_ok (header, trailer and checksum good) and
// id_ok (known command of the right length).
// Timing: pkt_valid comes two cycles after the last byte is accepted.
//
// Paper vs. this design: the field order is the paper's; every width, the
// header/trailer codes, the command codes and the checksum rule are this
// design's own choices (see tj_pkg).
module cmd_parser
  import tj_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_valid,
  input  logic [7:0] rx_data,
  output logic       pkt_valid,
  output command_t   pkt,
  output logic       cks_ok,
  output logic       id_ok
);

  typedef enum logic [1:0] {S_H0, S_H1, S_BODY, S_EVAL} state_e;

  state_e      state_q;
  logic [7:0]  buf_q [MAXLEN];
  logic [5:0]  idx_q;          // offset of the next byte
  logic [15:0] len_q;          // Size field
  logic [7:0]  sum_q;          // sum of bytes at offsets 0 .. len-4

  // Big-endian field readers at fixed offsets.
  function automatic logic [15:0] be16(input int unsigned off);
    return {buf_q[off], buf_q[off+1]};
  endfunction
  function automatic logic [31:0] be32(input int unsigned off);
    return {buf_q[off], buf_q[off+1], buf_q[off+2], buf_q[off+3]};
  endfunction
  function automatic logic [NSTRIP-1:0] be128(input int unsigned off);
    logic [NSTRIP-1:0] v;
    for (int unsigned i = 0; i < NSTRIP/8; i++) v[NSTRIP-1-8*i -: 8] = buf_q[off+i];
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_H0;
      idx_q   <= '0;
      len_q   <= '0;
      sum_q   <= '0;
      for (int i = 0; i < int'(MAXLEN); i++) buf_q[i] <= '0;
    end else begin
      unique case (state_q)
        S_H0: if (rx_valid && rx_data == HDR0) state_q <= S_H1;
        S_H1: if (rx_valid) begin
          if (rx_data == HDR1) begin
            state_q  <= S_BODY;
            buf_q[0] <= HDR0;
            buf_q[1] <= HDR1;
            sum_q    <= HDR0 + HDR1;
            idx_q    <= 6'd2;
          end else if (rx_data != HDR0) begin
            state_q <= S_H0;
          end
        end
        S_BODY: if (rx_valid) begin
          buf_q[idx_q] <= rx_data;
          idx_q        <= idx_q + 6'd1;
          if (idx_q == 6'd2) len_q[15:8] <= rx_data;
          if (idx_q == 6'd3) begin
            len_q[7:0] <= rx_data;
            if ({len_q[15:8], rx_data} < 16'(LEN_RESP) ||
                {len_q[15:8], rx_data} > 16'(MAXLEN))
              state_q <= S_H0;           // impossible Size: resynchronise
          end
          // Bytes 2 and 3 are always before the checksum (Size >= 9).
          if (idx_q < 6'd4 || 16'(idx_q) < len_q - 16'd3) sum_q <= sum_q + rx_data;
          if (idx_q >= 6'd4 && 16'(idx_q) == len_q - 16'd1) state_q <= S_EVAL;
        end
        S_EVAL: state_q <= S_H0;
        default: state_q <= S_H0;
      endcase
    end
  end

  // Evaluation of a complete packet (state S_EVAL).
  logic [5:0] lm1, lm2, lm3;
  logic [7:0] id_b;
  always_comb begin
    lm1  = 6'(len_q - 16'd1);
    lm2  = 6'(len_q - 16'd2);
    lm3  = 6'(len_q - 16'd3);
    id_b = buf_q[4];
  end

  command_t pkt_d;
  logic     cks_d, id_d;
  always_comb begin
    pkt_d           = '0;
    pkt_d.cmd_id    = id_b;
    cks_d = (buf_q[lm2] == TRL0) && (buf_q[lm1] == TRL1) && (buf_q[lm3] == sum_q);
    id_d  = 1'b0;
    unique case (id_b)
      CMD_EVENT: begin
        id_d               = (len_q == 16'(LEN_EVENT));
        pkt_d.ev.x_events  = be32(5);
        pkt_d.ev.z_pattern = be128(9);
        pkt_d.ev.u_period  = be32(25);
        pkt_d.ev.w_width   = be16(29);
        pkt_d.ev.t_delay   = be16(31);
        pkt_d.r_ack        = (buf_q[33] != 8'h00);
      end
      CMD_MON: begin
        id_d                = (len_q == 16'(LEN_MON));
        pkt_d.mon.y_width   = be16(5);
        pkt_d.mon.z_strips  = be128(7);
        pkt_d.mon.w_count   = be16(23);
        pkt_d.r_ack         = (buf_q[25] != 8'h00);
      end
      CMD_XTALK: begin
        id_d              = (len_q == 16'(LEN_XTALK));
        pkt_d.xt.x_hits   = be16(5);
        pkt_d.xt.d_delay  = be16(7);
        pkt_d.xt.w_width  = be16(9);
        pkt_d.r_ack       = (buf_q[11] != 8'h00);
      end
      default: pkt_d.r_ack = 1'b1;   // unknown command: always answered
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_valid <= 1'b0;
      pkt       <= '0;
      cks_ok    <= 1'b0;
      id_ok     <= 1'b0;
    end else begin
      pkt_valid <= (state_q == S_EVAL);
      if (state_q == S_EVAL) begin
        pkt    <= pkt_d;
        cks_ok <= cks_d;
        id_ok  <= id_d;
      end
    end
  end

endmodule
