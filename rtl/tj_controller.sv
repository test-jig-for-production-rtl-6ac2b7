// tj_controller: command dispatcher of the Test-Jig.
//
// The host selects a test methodology and sends its command; the jig runs
// exactly one test at a time against the one RPC-DAQ attached to it. This
// block takes each parsed command and
//   * refuses it with "bad checksum" if header/trailer/checksum failed, and
//     with "unknown command" if the Command ID is not Event, Monitoring or
//     Cross talk or the Size does not fit it (always answered);
//   * refuses it with "busy" while a test is still running;
//   * otherwise starts the matching pattern generator with the command's
//     fields and clears the fold counters of the global services link;
//   * for an accepted or busy command, asks for an acknowledgement when the
//     packet's R_Ack byte is non-zero.
// The configuration outputs are the parsed command's fields wired straight
// through (the parser holds them until the next packet); each generator
// latches its own copy on its start pulse.
// It also merges the generator outputs onto the 128 strip lines and the one
// trigger line. Idle generators hold their outputs low, so the merge is an OR.
// The one-test-at-a-time rule and the set of tests are the paper's. The
// refusal rules and status codes are this design's.
//
// Timing: a generator's start pulse follows pkt_valid by one cycle. A response
// waits in a one-entry register until resp_gen takes it; a packet that
// completes while that register is still full gets no response (it is still
// dispatched). Responses are 9 bytes and commands 15 or more, so this cannot
// happen while the host link keeps pace.
module tj_controller
  import tj_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // from cmd_parser
  input  logic              pkt_valid,
  input  command_t          pkt,
  input  logic              cks_ok,
  input  logic              id_ok,
  // to / from the generators
  output logic              start_ev,
  output logic              start_mon,
  output logic              start_xt,
  output event_cfg_t        ev_cfg,
  output mon_cfg_t          mon_cfg,
  output xtalk_cfg_t        xt_cfg,
  input  logic              ev_done,
  input  logic              mon_done,
  input  logic              xt_done,
  input  logic [NSTRIP-1:0] ev_strips,
  input  logic [NSTRIP-1:0] mon_strips,
  input  logic [NSTRIP-1:0] xt_strips,
  input  logic              ev_trig,
  input  logic              xt_trig,
  output logic [NSTRIP-1:0] strips,
  output logic              trig,
  output logic              fold_clr,
  output logic              running,
  output logic              test_done,
  // to resp_gen
  output logic              resp_req,
  input  logic              resp_ready,
  output logic [7:0]        resp_cmd,
  output status_e           resp_status
);

  typedef enum logic [1:0] {M_IDLE, M_EVENT, M_MON, M_XTALK} mode_e;
  mode_e mode_q;

  assign ev_cfg  = pkt.ev;
  assign mon_cfg = pkt.mon;
  assign xt_cfg  = pkt.xt;
  assign running = (mode_q != M_IDLE);
  assign strips  = ev_strips | mon_strips | xt_strips;
  assign trig    = ev_trig | xt_trig;

  logic    accept;
  status_e st;
  logic    answer;
  always_comb begin
    accept = 1'b0;
    answer = pkt.r_ack;
    if (!cks_ok) begin
      st     = ST_BAD_CKS;
      answer = 1'b1;
    end else if (!id_ok) begin
      st     = ST_BAD_CMD;
      answer = 1'b1;
    end else if (mode_q != M_IDLE) begin
      st = ST_BUSY;
    end else begin
      st     = ST_ACCEPTED;
      accept = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q      <= M_IDLE;
      start_ev    <= 1'b0;
      start_mon   <= 1'b0;
      start_xt    <= 1'b0;
      fold_clr    <= 1'b0;
      test_done   <= 1'b0;
      resp_req    <= 1'b0;
      resp_cmd    <= '0;
      resp_status <= ST_ACCEPTED;
    end else begin
      start_ev  <= 1'b0;
      start_mon <= 1'b0;
      start_xt  <= 1'b0;
      fold_clr  <= 1'b0;
      test_done <= 1'b0;

      if (resp_req && resp_ready) resp_req <= 1'b0;

      unique case (mode_q)
        M_EVENT: if (ev_done)  begin mode_q <= M_IDLE; test_done <= 1'b1; end
        M_MON:   if (mon_done) begin mode_q <= M_IDLE; test_done <= 1'b1; end
        M_XTALK: if (xt_done)  begin mode_q <= M_IDLE; test_done <= 1'b1; end
        default: ;
      endcase

      if (pkt_valid) begin
        if (accept) begin
          fold_clr <= 1'b1;
          unique case (pkt.cmd_id)
            CMD_EVENT: begin mode_q <= M_EVENT; start_ev  <= 1'b1; end
            CMD_MON:   begin mode_q <= M_MON;   start_mon <= 1'b1; end
            default:   begin mode_q <= M_XTALK; start_xt  <= 1'b1; end
          endcase
        end
        if (answer && !(resp_req && !resp_ready)) begin
          resp_req    <= 1'b1;
          resp_cmd    <= pkt.cmd_id;
          resp_status <= st;
        end
      end
    end
  end

  // A generator may only be started from idle, and only one at a time.
  a_one_start: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({start_ev, start_mon, start_xt}));

endmodule
