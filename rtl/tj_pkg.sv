// tj_pkg: shared constants and types of the Test-Jig firmware.
//
// The Test-Jig receives test commands from the host application as UDP
// payloads. Each payload carries, in this order, a Header, a Size, a Command
// ID, the command's own fields, an R_Ack byte, a Checksum and a Trailer (the
// field order of the three command packets follows the paper's packet
// figures). The paper gives no field widths, header/trailer values, command
// codes or checksum rule; the values below are this design's choices:
//   * all multi-byte fields are big-endian;
//   * Header = 8'hAA 8'h55, Trailer = 8'h55 8'hAA;
//   * Size = 16-bit total packet length in bytes, header and trailer included;
//   * Checksum = 8-bit sum modulo 256 of every byte before it;
//   * times and widths are counts of the system clock (50 MHz, 20 ns).
package tj_pkg;

  localparam int unsigned NSTRIP = 128;   // strip channels driven into the RPC-DAQ
  localparam int unsigned NFOLD  = 8;     // fold signals 1..4 fold, X and Y

  localparam logic [7:0] HDR0 = 8'hAA;
  localparam logic [7:0] HDR1 = 8'h55;
  localparam logic [7:0] TRL0 = 8'h55;
  localparam logic [7:0] TRL1 = 8'hAA;

  typedef enum logic [7:0] {
    CMD_EVENT = 8'h01,
    CMD_MON   = 8'h02,
    CMD_XTALK = 8'h03
  } cmd_id_e;

  // Packet lengths in bytes (header .. trailer).
  localparam int unsigned LEN_EVENT = 37;
  localparam int unsigned LEN_MON   = 29;
  localparam int unsigned LEN_XTALK = 15;
  localparam int unsigned LEN_RESP  = 9;
  localparam int unsigned MAXLEN    = LEN_EVENT;

  // Status byte returned in the acknowledgement.
  typedef enum logic [7:0] {
    ST_ACCEPTED = 8'h00,
    ST_BUSY     = 8'h01,
    ST_BAD_CKS  = 8'h02,
    ST_BAD_CMD  = 8'h03
  } status_e;

  // Event test: X events, rate U, pattern Z0-Z127, width W, hit-to-trigger delay T.
  typedef struct packed {
    logic [31:0]       x_events;
    logic [NSTRIP-1:0] z_pattern;
    logic [31:0]       u_period;
    logic [15:0]       w_width;
    logic [15:0]       t_delay;
  } event_cfg_t;

  // Monitoring test: width Y, strips Z, pulse count W.
  typedef struct packed {
    logic [15:0]       y_width;
    logic [NSTRIP-1:0] z_strips;
    logic [15:0]       w_count;
  } mon_cfg_t;

  // Cross talk test: X hits per channel, delay D, width W.
  typedef struct packed {
    logic [15:0] x_hits;
    logic [15:0] d_delay;
    logic [15:0] w_width;
  } xtalk_cfg_t;

  // One parsed command as handed from the parser to the controller.
  typedef struct packed {
    logic [7:0] cmd_id;
    logic       r_ack;
    event_cfg_t ev;
    mon_cfg_t   mon;
    xtalk_cfg_t xt;
  } command_t;

endpackage
