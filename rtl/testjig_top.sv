// testjig_top: firmware of the RPC-DAQ Test-Jig FPGA.
//
// The Test-Jig emulates the detector and the trigger system around one
// RPC-DAQ under test. The host test application sends a test command over
// Ethernet; the jig then drives 128 strip signals into the RPC-DAQ, sends it
// triggers, a 10 MHz clock and PPS over the global services link, and reads
// back the RPC-DAQ's eight fold (pre-trigger) signals. The RPC-DAQ reports
// its data to the host directly, and the host compares it with what it asked
// the jig to send. Three tests are built in: the Event test (a stored hit
// pattern played X times, each with a trigger), the Monitoring test (W pulses
// on selected strips, to check the rate counters) and the Cross talk test
// (hits on one channel at a time, each with a trigger, over all 128 channels).
//
// Data path: command bytes -> cmd_parser -> tj_controller -> {event_gen,
// mon_gen, xtalk_gen} -> 128 strips; triggers -> global_services -> trigger
// pin. tj_controller -> resp_gen -> acknowledgement bytes.
//
// Outside this module (not part of the RTL): the Ethernet controller with its
// TCP/IP stack and socket buffers and the processor that moves the UDP payload
// between it and rx_*/tx_* here; the LVDS and TTL-to-LVDS buffers (120 strips
// leave the FPGA as LVDS and 8 through external TTL-to-LVDS buffers, which is
// the same logic signal here); the oscillators, power-on reset and
// configuration flash. These are the paper's parts; the byte-stream boundary
// at rx_*/tx_* is this design's choice.
//
// Pin timing: the strip lines and the trigger each leave through one register,
// so the trigger rises exactly T (or D) cycles after the hit's leading edge.
//
// Clock and reset: one system clock clk (50 MHz by default, CLK_HZ). rst_n is
// the active-low board reset (power-on reset or push button); it is
// synchronised here, asserted asynchronously and released on a clock edge.
module testjig_top
  import tj_pkg::*;
#(
  parameter int unsigned CLK_HZ         = 50_000_000,
  parameter int unsigned GCLK_HZ        = 10_000_000,
  parameter int unsigned PPS_WIDTH      = 50,
  parameter int unsigned TRIG_W         = 5,
  parameter int unsigned XT_HIT_PERIOD  = 50_000
) (
  input  logic              clk,
  input  logic              rst_n,
  // command payload from the Ethernet side
  input  logic              rx_valid,
  input  logic [7:0]        rx_data,
  // acknowledgement payload to the Ethernet side
  output logic              tx_valid,
  output logic [7:0]        tx_data,
  input  logic              tx_ready,
  // to the RPC-DAQ front-end inputs
  output logic [NSTRIP-1:0] strip_out,
  // global services link
  output logic              trig_out,
  output logic              gclk_out,
  output logic              pps_out,
  input  logic [NFOLD-1:0]  fold_in,
  output logic [NFOLD-1:0]  fold_level,
  output logic [31:0]       fold_cnt [NFOLD],
  // status
  output logic              test_running,
  output logic              test_done,
  output logic [6:0]        xt_channel
);

  // Reset synchroniser.
  logic [1:0] rst_sync_q;
  logic       rst_n_i;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rst_sync_q <= '0;
    else        rst_sync_q <= {rst_sync_q[0], 1'b1};
  end
  assign rst_n_i = rst_sync_q[1];

  logic       pkt_valid, cks_ok, id_ok;
  command_t   pkt;

  logic              start_ev, start_mon, start_xt;
  event_cfg_t        ev_cfg;
  mon_cfg_t          mon_cfg;
  xtalk_cfg_t        xt_cfg;
  logic              ev_busy, mon_busy, xt_busy;
  logic              ev_done, mon_done, xt_done;
  logic [NSTRIP-1:0] ev_strips, mon_strips, xt_strips;
  logic              ev_trig, xt_trig, trig;
  logic              fold_clr;
  logic [NSTRIP-1:0] strips;
  logic              resp_req, resp_ready;
  logic [7:0]        resp_cmd;
  status_e           resp_status;

  cmd_parser u_parser (
    .clk, .rst_n(rst_n_i), .rx_valid, .rx_data,
    .pkt_valid, .pkt, .cks_ok, .id_ok
  );

  tj_controller u_ctrl (
    .clk, .rst_n(rst_n_i),
    .pkt_valid, .pkt, .cks_ok, .id_ok,
    .start_ev, .start_mon, .start_xt, .ev_cfg, .mon_cfg, .xt_cfg,
    .ev_done, .mon_done, .xt_done,
    .ev_strips, .mon_strips, .xt_strips, .ev_trig, .xt_trig,
    .strips(strips), .trig, .fold_clr,
    .running(test_running), .test_done,
    .resp_req, .resp_ready, .resp_cmd, .resp_status
  );

  event_gen #(.TRIG_W(TRIG_W)) u_event (
    .clk, .rst_n(rst_n_i), .start(start_ev), .cfg(ev_cfg),
    .strips(ev_strips), .trig(ev_trig), .busy(ev_busy), .done(ev_done)
  );

  mon_gen u_mon (
    .clk, .rst_n(rst_n_i), .start(start_mon), .cfg(mon_cfg),
    .strips(mon_strips), .busy(mon_busy), .done(mon_done)
  );

  xtalk_gen #(.TRIG_W(TRIG_W), .HIT_PERIOD(XT_HIT_PERIOD)) u_xtalk (
    .clk, .rst_n(rst_n_i), .start(start_xt), .cfg(xt_cfg),
    .strips(xt_strips), .trig(xt_trig), .chan(xt_channel),
    .busy(xt_busy), .done(xt_done)
  );

  global_services #(.CLK_HZ(CLK_HZ), .GCLK_HZ(GCLK_HZ), .PPS_WIDTH(PPS_WIDTH)) u_gs (
    .clk, .rst_n(rst_n_i), .trig_in(trig), .trig_out, .gclk_out, .pps_out,
    .fold_in, .fold_clr, .fold_level, .fold_cnt
  );

  resp_gen u_resp (
    .clk, .rst_n(rst_n_i), .req(resp_req), .req_ready(resp_ready),
    .cmd_id(resp_cmd), .status(resp_status),
    .tx_valid, .tx_data, .tx_ready
  );

  // Output register of the strip lines: it matches the trigger's register in
  // global_services, so the hit-to-trigger delay at the pins is exactly T.
  always_ff @(posedge clk or negedge rst_n_i) begin
    if (!rst_n_i) strip_out <= '0;
    else          strip_out <= strips;
  end

  // Only one generator may be running at a time.
  a_one_busy: assert property (@(posedge clk) disable iff (!rst_n_i)
    $onehot0({ev_busy, mon_busy, xt_busy}));

endmodule
