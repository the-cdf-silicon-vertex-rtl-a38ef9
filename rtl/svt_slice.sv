// svt_slice: the complete data-driven pipeline of one 30 degree azimuthal
// slice of the silicon detector.
//
//   30 strip streams -> 30 hit_finders -+
//   XFT tracks ---------------------------+-> merger tree (8 + 2 + 1) -+-> AM board --+
//                                                                      +-> hit buffer <+
//   hit buffer (track candidates) -> track_fitter -> fitted tracks out
//
// One hit finder per silicon plane (6 barrels x 5 layers).  Mergers fan the
// 30 hit streams and the XFT stream into one cable; the last merger's two
// outputs feed the AM board and the hit buffer with the same words.  The AM
// board finds the roads, the hit buffer turns each road into candidates
// with their hits, and the track fitter fits them.  Every stage is
// asynchronous and data driven: each waits for its input and stops its
// sender with hold.  Four spy buffers sit on the AM input, the road cable,
// the candidate cable and the track cable; all freeze together on `freeze`
// and are read or loaded through the host port (spy_sel picks one).
// `error` pulses on any event-tag mismatch or parity error in the slice.
// The stage order and the counts of planes, chips and patterns follow the
// paper; the merger tree shape and the spy placement are this design's.
module svt_slice
  import svt_pkg::*;
#(
  parameter int unsigned NPLANES   = 30,
  parameter int unsigned NCHIPS    = 256,
  parameter int unsigned NPATT     = 128,
  parameter int unsigned NROADS    = NCHIPS * NPATT,
  parameter int unsigned SPY_DEPTH = 100000,
  parameter int unsigned MAXH      = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // strip data of the slice's planes, plane p = barrel*5 + layer
  input  svt_word_t [NPLANES-1:0]         strip_word,
  input  logic [NPLANES-1:0]              strip_valid,
  output logic [NPLANES-1:0]              strip_hold,
  input  svt_word_t                       xft_word,
  input  logic                            xft_valid,
  output logic                            xft_hold,
  // fitted tracks
  output svt_word_t                       trk_word,
  output logic                            trk_valid,
  input  logic                            trk_hold,
  // configuration
  input  logic [3:0]                      wedge,
  input  logic [7:0]                      threshold,
  input  bin_cfg_t                        cfg,
  input  logic                            pat_we,
  input  logic [ROAD_W-1:0]               pat_id,
  input  logic [AM_LAYERS-1:0][SS_W-1:0]  pat_data,
  input  logic signed [5:0][5:0][7:0]     coef,
  input  logic [3:0]                      shift,
  input  logic [25:0]                     chi2_max,
  input  logic                            const_we,
  input  logic [5:0][15:0]                const_edge,
  input  logic signed [5:0][17:0]         const_base,
  // spy buffers
  input  logic                            freeze,
  input  logic [1:0]                      spy_sel,
  input  logic [3:0]                      spy_source_mode,
  input  logic                            spy_source_start,
  input  logic [$clog2(SPY_DEPTH)-1:0]    spy_source_len,
  input  logic                            spy_we,
  input  logic [$clog2(SPY_DEPTH)-1:0]    spy_addr,
  input  svt_word_t                       spy_wdata,
  output svt_word_t                       spy_rdata,
  output logic [$clog2(SPY_DEPTH)-1:0]    spy_wptr,
  // status
  output logic                            error,
  output logic                            hb_overflow,
  output logic                            fit_start
);
  localparam int unsigned NSTREAM = NPLANES + 1;                 // + XFT
  localparam int unsigned NM1     = (NSTREAM + 3) / 4;           // level-1 mergers
  localparam int unsigned NM2     = (NM1 + 3) / 4;               // level-2 mergers
  localparam int unsigned SAW     = $clog2(SPY_DEPTH);

  // ---------------- hit finders
  svt_word_t [NM1*4-1:0] s_word;
  logic [NM1*4-1:0]      s_valid, s_hold;
  logic [NPLANES-1:0]    hf_perr;

  for (genvar p = 0; p < NPLANES; p++) begin : g_hf
    hit_finder u_hf (
      .clk, .rst_n,
      .layer(3'(p % NSIL_LAYERS)), .barrel(3'(p / NSIL_LAYERS)), .threshold,
      .in_word(strip_word[p]), .in_valid(strip_valid[p]), .in_hold(strip_hold[p]),
      .out_word(s_word[p]), .out_valid(s_valid[p]), .out_hold(s_hold[p]),
      .parity_err(hf_perr[p]));
  end
  assign s_word[NPLANES]  = xft_word;
  assign s_valid[NPLANES] = xft_valid;
  assign xft_hold         = s_hold[NPLANES];
  for (genvar u = NSTREAM; u < NM1*4; u++) begin : g_unused
    assign s_word[u]  = '0;
    assign s_valid[u] = 1'b0;
  end

  // ---------------- merger tree
  svt_word_t [NM2*4-1:0] m1_word;
  logic [NM2*4-1:0]      m1_valid, m1_hold;
  logic [NM1-1:0]        m1_terr, m1_perr;

  for (genvar m = 0; m < NM1; m++) begin : g_m1
    logic [3:0] en;
    for (genvar i = 0; i < 4; i++) begin : g_en
      assign en[i] = (m*4 + i) < NSTREAM;
    end
    svt_word_t [1:0] ow;
    logic [1:0]      ov;
    merger #(.NIN(4), .NOUT(2)) u_m (
      .clk, .rst_n, .in_enable(en),
      .in_word(s_word[m*4 +: 4]), .in_valid(s_valid[m*4 +: 4]), .in_hold(s_hold[m*4 +: 4]),
      .out_word(ow), .out_valid(ov), .out_hold({1'b0, m1_hold[m]}),
      .tag_err(m1_terr[m]), .parity_err(m1_perr[m]));
    assign m1_word[m]     = ow[0];
    assign m1_valid[m]    = ov[0];
  end
  for (genvar u = NM1; u < NM2*4; u++) begin : g_unused1
    assign m1_word[u]  = '0;
    assign m1_valid[u] = 1'b0;
  end

  svt_word_t [3:0]  m2_word;
  logic [3:0]       m2_valid, m2_hold;
  logic [NM2-1:0]   m2_terr, m2_perr;

  for (genvar m = 0; m < NM2; m++) begin : g_m2
    logic [3:0] en;
    for (genvar i = 0; i < 4; i++) begin : g_en
      assign en[i] = (m*4 + i) < NM1;
    end
    svt_word_t [1:0] ow;
    logic [1:0]      ov;
    merger #(.NIN(4), .NOUT(2)) u_m (
      .clk, .rst_n, .in_enable(en),
      .in_word(m1_word[m*4 +: 4]), .in_valid(m1_valid[m*4 +: 4]), .in_hold(m1_hold[m*4 +: 4]),
      .out_word(ow), .out_valid(ov), .out_hold({1'b0, m2_hold[m]}),
      .tag_err(m2_terr[m]), .parity_err(m2_perr[m]));
    assign m2_word[m]  = ow[0];
    assign m2_valid[m] = ov[0];
  end
  for (genvar u = NM2; u < 4; u++) begin : g_unused2
    assign m2_word[u]  = '0;
    assign m2_valid[u] = 1'b0;
  end

  // last merger: two identical outputs, to the AM board and the hit buffer
  svt_word_t [1:0] h_word;
  logic [1:0]      h_valid, h_hold;
  logic            m3_terr, m3_perr;
  logic [3:0]      m3_en;
  for (genvar i = 0; i < 4; i++) begin : g_m3en
    assign m3_en[i] = i < NM2;
  end
  merger #(.NIN(4), .NOUT(2)) u_m3 (
    .clk, .rst_n, .in_enable(m3_en),
    .in_word(m2_word), .in_valid(m2_valid), .in_hold(m2_hold),
    .out_word(h_word), .out_valid(h_valid), .out_hold(h_hold),
    .tag_err(m3_terr), .parity_err(m3_perr));

  // ---------------- spy buffers on the four board-to-board cables
  svt_word_t [3:0]       sp_in_w, sp_out_w, sp_rdata;
  logic [3:0]            sp_in_v, sp_in_h, sp_out_v, sp_out_h, sp_busy, sp_wrapped, sp_frozen;
  logic [3:0][SAW-1:0]   sp_wptr;

  for (genvar k = 0; k < 4; k++) begin : g_spy
    spy_buffer #(.DEPTH(SPY_DEPTH)) u_spy (
      .clk, .rst_n,
      .in_word(sp_in_w[k]), .in_valid(sp_in_v[k]), .in_hold(sp_in_h[k]),
      .out_word(sp_out_w[k]), .out_valid(sp_out_v[k]), .out_hold(sp_out_h[k]),
      .freeze, .source_mode(spy_source_mode[k]),
      .source_start(spy_source_start && spy_sel == 2'(k)), .source_len(spy_source_len),
      .source_busy(sp_busy[k]),
      .host_we(spy_we && spy_sel == 2'(k)), .host_addr(spy_addr), .host_wdata(spy_wdata),
      .host_rdata(sp_rdata[k]), .wptr(sp_wptr[k]), .wrapped(sp_wrapped[k]), .frozen(sp_frozen[k]));
  end
  assign spy_rdata = sp_rdata[spy_sel];
  assign spy_wptr  = sp_wptr[spy_sel];

  // ---------------- AM board
  logic am_perr;
  assign sp_in_w[0] = h_word[0];
  assign sp_in_v[0] = h_valid[0];
  assign h_hold[0]  = sp_in_h[0];

  am_board #(.NCHIPS(NCHIPS), .NPATT(NPATT)) u_am (
    .clk, .rst_n, .cfg, .pat_we, .pat_id, .pat_data,
    .in_word(sp_out_w[0]), .in_valid(sp_out_v[0]), .in_hold(sp_out_h[0]),
    .out_word(sp_in_w[1]), .out_valid(sp_in_v[1]), .out_hold(sp_in_h[1]),
    .parity_err(am_perr));

  // ---------------- hit buffer
  logic hb_perr;
  hit_buffer #(.NROADS(NROADS), .MAXH(MAXH)) u_hb (
    .clk, .rst_n, .cfg, .pat_we, .pat_id, .pat_data,
    .hit_word(h_word[1]), .hit_valid(h_valid[1]), .hit_hold(h_hold[1]),
    .road_word(sp_out_w[1]), .road_valid(sp_out_v[1]), .road_hold(sp_out_h[1]),
    .out_word(sp_in_w[2]), .out_valid(sp_in_v[2]), .out_hold(sp_in_h[2]),
    .overflow(hb_overflow), .parity_err(hb_perr));

  // ---------------- track fitter
  logic tf_perr;
  track_fitter #(.NROADS(NROADS)) u_tf (
    .clk, .rst_n, .wedge, .coef, .shift, .chi2_max,
    .const_we, .const_addr(pat_id), .const_edge, .const_base,
    .in_word(sp_out_w[2]), .in_valid(sp_out_v[2]), .in_hold(sp_out_h[2]),
    .out_word(sp_in_w[3]), .out_valid(sp_in_v[3]), .out_hold(sp_in_h[3]),
    .parity_err(tf_perr), .fit_start);

  assign trk_word    = sp_out_w[3];
  assign trk_valid   = sp_out_v[3];
  assign sp_out_h[3] = trk_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) error <= 1'b0;
    else        error <= (|hf_perr) | (|m1_terr) | (|m1_perr) | (|m2_terr) | (|m2_perr)
                         | m3_terr | m3_perr | am_perr | hb_perr | tf_perr;
  end

endmodule
