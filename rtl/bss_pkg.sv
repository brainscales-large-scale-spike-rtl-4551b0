// bss_pkg: types and constants shared by the spike-event communication logic.
//
// A HICANN event is a 12-bit source pulse address plus a 15-bit timestamp that
// states the arrival deadline in system-time units. On the network an event is
// 30 bits: a 15-bit global unique identifier (GUID) and the 15-bit timestamp.
// Each event occupies a 32-bit slot; four slots make one 128-bit network word,
// so the 496-byte maximum payload holds 124 events (31 words).
// Fixed by the paper: 12-bit address, 15-bit timestamp, 16-bit destination,
// 8 HICANN links, 30-bit events, 124 events per message, groups of four.
// Chosen here: the 15-bit GUID (so that GUID + timestamp = 30 bits) and the
// 128-bit word.
package bss_pkg;

  localparam int unsigned N_HICANN   = 8;
  localparam int unsigned ADDR_W     = 12;
  localparam int unsigned TS_W       = 15;
  localparam int unsigned DEST_W     = 16;
  localparam int unsigned GUID_W     = 15;
  localparam int unsigned SLOT_W     = 32;
  localparam int unsigned GROUP      = 4;
  localparam int unsigned WORD_W     = SLOT_W * GROUP;      // 128
  localparam int unsigned MAX_EVENTS = 124;                 // 496 B / 4 B
  localparam int unsigned CNT_W      = $clog2(MAX_EVENTS + 1);

  typedef logic [TS_W-1:0]   ts_t;
  typedef logic [DEST_W-1:0] dest_t;
  typedef logic [GUID_W-1:0] guid_t;

  // Event as delivered by a HICANN link.
  typedef struct packed {
    ts_t               ts;
    logic [ADDR_W-1:0] addr;
  } hicann_event_t;

  // Event as carried over the network (30 bits).
  typedef struct packed {
    guid_t guid;
    ts_t   ts;
  } net_event_t;

  localparam int unsigned EVENT_W = $bits(net_event_t);     // 30

  // Source lookup result: where the event goes and under which GUID.
  typedef struct packed {
    dest_t dest;
    guid_t guid;
  } src_entry_t;

  // Tagged event in the input buffer: Dst and Pls fields.
  typedef struct packed {
    dest_t      dest;
    net_event_t ev;
  } tagged_event_t;

  // One group of up to four events leaving a bucket.
  typedef struct packed {
    logic [GROUP-1:0][SLOT_W-1:0] slots;   // slot 0 = oldest event
    logic [2:0]                   count;   // valid events, 1..4
  } group_t;

  // Header word of an outgoing message (layout chosen by this design).
  typedef struct packed {
    logic [WORD_W-DEST_W-CNT_W-1:0] reserved;
    logic [CNT_W-1:0]               count;
    dest_t                          dest;
  } msg_header_t;

  // Modular (wrap-around) "a is at or before b" for 15-bit timestamps.
  function automatic logic ts_before_eq(ts_t a, ts_t b);
    ts_t d;
    d = b - a;
    return !d[TS_W-1];
  endfunction

  function automatic logic [SLOT_W-1:0] ev_to_slot(net_event_t e);
    return {{(SLOT_W-EVENT_W){1'b0}}, e};
  endfunction

  function automatic net_event_t slot_to_ev(logic [SLOT_W-1:0] s);
    return net_event_t'(s[EVENT_W-1:0]);
  endfunction

endpackage
