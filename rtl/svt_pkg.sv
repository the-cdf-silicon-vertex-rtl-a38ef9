// svt_pkg: word formats and constants shared by every SVT board.
//
// Every internal SVT data path is an "SVT cable": a 21-bit data word plus an
// end-packet (EP) and an end-event (EE) bit, a data strobe from sender to
// receiver, and a flow-control (hold) line back from receiver to sender.
// Data travel as variable-length packets; an event ends with one EE word.
// The 21-bit width, the EP/EE bits and the strobe/hold pair follow the paper.
// The bit layouts of the individual word types below are this design's own:
//
//   EE word      : [7:0] event tag, [8] parity of the cable-event, rest 0
//   strip word   : [19:8] strip channel, [7:0] pulse height
//   silicon hit  : [20:18] layer 0..4, [17:15] barrel, [14:0] centroid (1/8 strip)
//   XFT track    : [20:18] = 5, [16:11] curvature (signed), [10:0] phi in slice
//   superstrip   : [15:13] AM layer 0..4, [12:0] superstrip number
//   road         : [14:0] pattern (road) ID within a slice
//   candidate    : road word, XFT word, four silicon hit words (EP on the last)
//   fitted track : w0 {wedge, XFT c, XFT phi}, w1 {c, phi}, w2 {d, chi2}
//   timing word  : one-word packet, [19:0] processing time in clock cycles
package svt_pkg;

  localparam int unsigned DATA_W = 21;

  typedef struct packed {
    logic              ee;    // end of event
    logic              ep;    // end of packet
    logic [DATA_W-1:0] data;
  } svt_word_t;

  localparam int unsigned WORD_W = DATA_W + 2;

  // Event tag and parity position inside an EE word
  localparam int unsigned TAG_W      = 8;
  localparam int unsigned PARITY_BIT = 8;

  // Hit and track fields
  localparam int unsigned NSIL_LAYERS = 5;   // silicon layers available
  localparam int unsigned AM_LAYERS   = 5;   // XFT + four silicon layers
  localparam logic [2:0]  XFT_LAYER   = 3'd5;
  localparam int unsigned COORD_W     = 15;  // silicon centroid
  localparam int unsigned XPHI_W      = 11;  // XFT phi inside a slice
  localparam int unsigned XC_W        = 6;   // XFT curvature
  localparam int unsigned SS_W        = 13;  // superstrip number
  localparam int unsigned ROAD_W      = 15;  // 32K patterns per slice
  localparam int unsigned NSLICE      = 12;  // 30 degree azimuthal slices

  // Superstrip (bin) configuration of one slice, written at start of run.
  //   sil_use[l]      silicon layer l takes part (four of the five)
  //   sil_am_layer[l] AM layer (1..4) that silicon layer l feeds
  //   recip[a]        bin width of AM layer a as 2^16 / width (width in
  //                   coordinate units), so bin = coord * recip >> 16
  //   swim_k          XFT swim: phi at the silicon outer radius is
  //                   phi + (c * swim_k) >>> 4
  typedef struct packed {
    logic [NSIL_LAYERS-1:0]            sil_use;
    logic [NSIL_LAYERS-1:0][2:0]       sil_am_layer;
    logic [AM_LAYERS-1:0][15:0]        recip;
    logic signed [7:0]                 swim_k;
  } bin_cfg_t;

  function automatic svt_word_t make_word(logic [DATA_W-1:0] d, logic ep, logic ee);
    svt_word_t w;
    w.data = d;
    w.ep   = ep;
    w.ee   = ee;
    return w;
  endfunction

  function automatic svt_word_t make_ee(logic [TAG_W-1:0] tag);
    svt_word_t w;
    w.data = DATA_W'(tag);
    w.ep   = 1'b0;
    w.ee   = 1'b1;
    return w;
  endfunction

endpackage
