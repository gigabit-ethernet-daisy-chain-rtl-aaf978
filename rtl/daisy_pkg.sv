// daisy_pkg: types and constants shared by the daisy-chain network processor.
//
// Frames between the SFP interfaces, the Path Controller and the two TCP/IP
// engines travel as a byte-wide stream in the style of GMII: one byte per
// 125 MHz clock with an enable that is high for the whole frame, preamble
// and start-of-frame delimiter included. The destination MAC address is the
// first field after the delimiter, so it starts at byte DA_OFFSET of the
// stream. The broadcast address FF:FF:FF:FF:FF:FF is the Ethernet one.
//
// Event data travel at 133 MHz. Every event starts with one 64-bit header
// word (ev_header_t) followed by nwords 64-bit payload words; on the byte
// streams of the TCP engines the same words are sent most significant byte
// first. The header layout, the byte order and the event-number width are
// choices of this design: the source only says that an event carries its
// event number together with the digitized data.
package daisy_pkg;

  localparam int MAC_W = 48;
  localparam logic [MAC_W-1:0] BCAST_MAC = 48'hFFFF_FFFF_FFFF;

  // GMII-style framing
  localparam int          PREAMBLE_LEN = 7;
  localparam logic [7:0]  PREAMBLE_BYTE = 8'h55;
  localparam logic [7:0]  SFD_BYTE      = 8'hD5;
  localparam int          DA_OFFSET     = PREAMBLE_LEN + 1;  // byte index of the first DA byte
  localparam int          MIN_IFG       = 12;                // idle bytes between frames

  typedef struct packed {
    logic       en;   // frame enable (high for every byte of a frame)
    logic [7:0] d;    // frame byte
  } gmii_t;

  // Event data
  localparam int EVNUM_W = 32;

  typedef struct packed {
    logic [EVNUM_W-1:0] evnum;     // event number from the Trigger I/F
    logic [15:0]        board_id;  // identifies the ROESTI that produced the event
    logic [15:0]        nwords;    // number of 64-bit payload words after the header
  } ev_header_t;

  // State of the TCP Arbiter of the Data Carrier
  typedef enum logic [1:0] {
    SUSPENSION = 2'd0,
    MYROESTI   = 2'd1,
    NEIGHBOR   = 2'd2
  } tcp_arb_state_e;

  // True if event number a is older than b; the difference is taken modulo
  // 2**EVNUM_W so that the order survives a wrap of the counter.
  function automatic logic ev_older(input logic [EVNUM_W-1:0] a, input logic [EVNUM_W-1:0] b);
    logic [EVNUM_W-1:0] diff;
    diff = a - b;
    return diff[EVNUM_W-1];
  endfunction

endpackage
