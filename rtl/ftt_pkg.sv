// ftt_pkg: message format and shared constants of the FTT processing board.
//
// All data between boards travels as 48-bit words. The first 9 bits of a
// word (taken here as bits 47:39) are the channel number, which the routing
// tables of every programmable component use to forward the word. The other
// 39 bits are payload. The channel width, the word width and the histogram
// sizes (40 kappa x 640 phi bins at L2, 8 x 60 at L1, 4 trigger groups, 5x5
// search array, 48 tracks) follow the paper. The payload layout below (a
// 3-bit message type followed by type-specific fields) is this design's own
// choice; the paper only says the remaining bits carry track segment data or
// control words.
package ftt_pkg;

  localparam int unsigned MSG_W   = 48;   // LVDS channel-link word
  localparam int unsigned CH_W    = 9;    // channel number width
  localparam int unsigned NCHAN   = 1 << CH_W;
  localparam int unsigned TYPE_W  = 3;

  localparam int unsigned NGROUPS    = 4;    // radial trigger groups
  localparam int unsigned KAPPA_BINS = 40;   // L2 virtual histogram
  localparam int unsigned PHI_BINS   = 640;
  localparam int unsigned KAPPA_W    = 6;
  localparam int unsigned PHI_W      = 10;
  localparam int unsigned BIN_W      = KAPPA_W + PHI_W;
  localparam int unsigned INFO_W     = 18;   // "additional track information"
  localparam int unsigned MAX_TRACKS = 48;

  localparam int unsigned L1_KAPPA_BINS = 8; // L1 coarse histogram
  localparam int unsigned L1_PHI_BINS   = 60;

  localparam int unsigned PT_W    = 16;
  localparam int unsigned THETA_W = 10;

  typedef logic [MSG_W-1:0] msg_t;
  typedef logic [CH_W-1:0]  chan_t;

  typedef enum logic [TYPE_W-1:0] {
    MT_SEGMENT  = 3'd0,   // track segment from L1 (group, kappa, phi, info)
    MT_EOE      = 3'd1,   // end of event: start processing
    MT_TRKSEG   = 3'd2,   // linked segment of a track (same fields as MT_SEGMENT)
    MT_TRKLAST  = 3'd3,   // last linked segment of a track
    MT_FIT      = 3'd4,   // fitted track (pt, phi, theta)
    MT_DECISION = 3'd5    // trigger decision word
  } msg_type_e;

  // Track segment fields: bits [35:0] of the payload.
  typedef struct packed {
    logic [1:0]         group;
    logic [KAPPA_W-1:0] kappa;
    logic [PHI_W-1:0]   phi;
    logic [INFO_W-1:0]  info;
  } segment_t;

  // Fitted track fields.
  typedef struct packed {
    logic [PT_W-1:0]    pt;
    logic [PHI_W-1:0]   phi;
    logic [THETA_W-1:0] theta;
  } fit_t;

  typedef struct packed {
    chan_t     ch;
    msg_type_e mtype;
    logic [35:0] body;
  } msg_s;

  function automatic chan_t msg_chan(msg_t m);
    return m[MSG_W-1 -: CH_W];
  endfunction

  function automatic msg_type_e msg_type(msg_t m);
    return msg_type_e'(m[MSG_W-CH_W-1 -: TYPE_W]);
  endfunction

  function automatic msg_t make_msg(chan_t ch, msg_type_e t, logic [35:0] body);
    return {ch, t, body};
  endfunction

  function automatic segment_t msg_segment(msg_t m);
    return segment_t'(m[35:0]);
  endfunction

  function automatic fit_t msg_fit(msg_t m);
    return fit_t'(m[35:0]);
  endfunction

endpackage
