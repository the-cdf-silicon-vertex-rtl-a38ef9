// svt_top: the Silicon Vertex Trigger, twelve 30 degree slices and the
// final clean-up stage.
//
//   slice 0..11 (svt_slice) -> 3 mergers -> 1 merger -> spy -> cleanup -> spy -> out
//
// Each slice receives the strip data of its 30 silicon planes and the XFT
// tracks of its azimuth, and produces fitted tracks.  A two-level merger
// tree concatenates the twelve slices' tracks of each event into one cable
// to the clean-up board, which removes duplicate tracks, subtracts the beam
// offset from d and appends the event's processing time.  The single output
// cable goes to the Level 2 processor.
//
// Diagnostics: every slice's four spy buffers and the two around the clean-up
// board freeze together when the host raises host_freeze or when any board
// reports an error (event-tag mismatch or parity error); the error is held
// until err_clear.  This models the backplane freeze and error lines.  The
// host reaches one spy buffer at a time: spy_sel = slice*4 + k for a slice
// buffer (k = 0 AM input, 1 roads, 2 candidates, 3 tracks), 48 for the
// clean-up input and 49 for the clean-up output.  Configuration is written by
// the host at start of run: bin widths, fit coefficients and cut are shared
// by all slices (the slices are identical by symmetry); patterns and
// per-pattern constants are written into the slice chosen by cfg_slice.
// Slice counts and the order of stages follow the paper; the tree shape and
// the host interface are this design's.
module svt_top
  import svt_pkg::*;
#(
  parameter int unsigned NSL       = NSLICE,
  parameter int unsigned NPLANES   = 30,
  parameter int unsigned NCHIPS    = 256,
  parameter int unsigned NPATT     = 128,
  parameter int unsigned SPY_DEPTH = 100000
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // detector inputs
  input  svt_word_t [NSL-1:0][NPLANES-1:0]        strip_word,
  input  logic [NSL-1:0][NPLANES-1:0]             strip_valid,
  output logic [NSL-1:0][NPLANES-1:0]             strip_hold,
  input  svt_word_t [NSL-1:0]                     xft_word,
  input  logic [NSL-1:0]                          xft_valid,
  output logic [NSL-1:0]                          xft_hold,
  input  logic                                    l1_accept,
  // output to Level 2
  output svt_word_t                               out_word,
  output logic                                    out_valid,
  input  logic                                    out_hold,
  // configuration
  input  logic [7:0]                              threshold,
  input  bin_cfg_t                                cfg,
  input  logic [3:0]                              cfg_slice,
  input  logic                                    pat_we,
  input  logic [ROAD_W-1:0]                       pat_id,
  input  logic [AM_LAYERS-1:0][SS_W-1:0]          pat_data,
  input  logic signed [5:0][5:0][7:0]             coef,
  input  logic [3:0]                              shift,
  input  logic [25:0]                             chi2_max,
  input  logic                                    const_we,
  input  logic [5:0][15:0]                        const_edge,
  input  logic signed [5:0][17:0]                 const_base,
  input  logic signed [11:0]                      beam_x,
  input  logic signed [11:0]                      beam_y,
  // spy buffers and error line
  input  logic                                    host_freeze,
  input  logic                                    err_clear,
  input  logic [5:0]                              spy_sel,
  input  logic                                    spy_source_mode,
  input  logic                                    spy_source_start,
  input  logic [$clog2(SPY_DEPTH)-1:0]            spy_source_len,
  input  logic                                    spy_we,
  input  logic [$clog2(SPY_DEPTH)-1:0]            spy_addr,
  input  svt_word_t                               spy_wdata,
  output svt_word_t                               spy_rdata,
  output logic [$clog2(SPY_DEPTH)-1:0]            spy_wptr,
  output logic                                    error_line,
  output logic                                    frozen,
  // status counters for monitoring
  output logic                                    ghost,
  output logic [NSL-1:0]                          fit_start,
  output logic [NSL-1:0]                          hb_overflow,
  output logic                                    trk_overflow
);
  localparam int unsigned SAW = $clog2(SPY_DEPTH);
  localparam int unsigned NT1 = (NSL + 3) / 4;

  logic                  freeze;
  logic [NSL-1:0]        sl_err;
  logic                  tree_err, cu_perr;
  logic                  c_hold;

  assign freeze = host_freeze | error_line;
  assign frozen = freeze;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         error_line <= 1'b0;
    else if (err_clear) error_line <= 1'b0;
    else if ((|sl_err) || tree_err || cu_perr) error_line <= 1'b1;
  end

  // ---------------- slices
  svt_word_t [NT1*4-1:0]          t_word;
  logic [NT1*4-1:0]               t_valid, t_hold;
  svt_word_t [NSL-1:0]            sl_rdata;
  logic [NSL-1:0][SAW-1:0]        sl_wptr;

  for (genvar s = 0; s < NSL; s++) begin : g_slice
    svt_slice #(.NPLANES(NPLANES), .NCHIPS(NCHIPS), .NPATT(NPATT), .SPY_DEPTH(SPY_DEPTH)) u_sl (
      .clk, .rst_n,
      .strip_word(strip_word[s]), .strip_valid(strip_valid[s]), .strip_hold(strip_hold[s]),
      .xft_word(xft_word[s]), .xft_valid(xft_valid[s]), .xft_hold(xft_hold[s]),
      .trk_word(t_word[s]), .trk_valid(t_valid[s]), .trk_hold(t_hold[s]),
      .wedge(4'(s)), .threshold, .cfg,
      .pat_we(pat_we && cfg_slice == 4'(s)), .pat_id, .pat_data,
      .coef, .shift, .chi2_max,
      .const_we(const_we && cfg_slice == 4'(s)), .const_edge, .const_base,
      .freeze, .spy_sel(spy_sel[1:0]),
      .spy_source_mode({4{spy_source_mode && spy_sel[5:2] == 4'(s)}}),
      .spy_source_start(spy_source_start && spy_sel[5:2] == 4'(s)),
      .spy_source_len,
      .spy_we(spy_we && spy_sel[5:2] == 4'(s)), .spy_addr, .spy_wdata,
      .spy_rdata(sl_rdata[s]), .spy_wptr(sl_wptr[s]),
      .error(sl_err[s]), .hb_overflow(hb_overflow[s]), .fit_start(fit_start[s]));
  end
  for (genvar u = NSL; u < NT1*4; u++) begin : g_unused
    assign t_word[u]  = '0;
    assign t_valid[u] = 1'b0;
  end

  // ---------------- track merger tree
  svt_word_t [3:0]   u_word;
  logic [3:0]        u_valid, u_hold;
  logic [NT1-1:0]    t1_terr, t1_perr;

  for (genvar m = 0; m < NT1; m++) begin : g_t1
    logic [3:0] en;
    for (genvar i = 0; i < 4; i++) begin : g_en
      assign en[i] = (m*4 + i) < NSL;
    end
    svt_word_t [1:0] ow;
    logic [1:0]      ov;
    merger #(.NIN(4), .NOUT(2)) u_m (
      .clk, .rst_n, .in_enable(en),
      .in_word(t_word[m*4 +: 4]), .in_valid(t_valid[m*4 +: 4]), .in_hold(t_hold[m*4 +: 4]),
      .out_word(ow), .out_valid(ov), .out_hold({1'b0, u_hold[m]}),
      .tag_err(t1_terr[m]), .parity_err(t1_perr[m]));
    assign u_word[m]  = ow[0];
    assign u_valid[m] = ov[0];
  end
  for (genvar u = NT1; u < 4; u++) begin : g_unused1
    assign u_word[u]  = '0;
    assign u_valid[u] = 1'b0;
  end

  svt_word_t [1:0] f_word;
  logic [1:0]      f_valid;
  logic            t2_terr, t2_perr;
  logic [3:0]      t2_en;
  for (genvar i = 0; i < 4; i++) begin : g_t2en
    assign t2_en[i] = i < NT1;
  end
  merger #(.NIN(4), .NOUT(2)) u_t2 (
    .clk, .rst_n, .in_enable(t2_en),
    .in_word(u_word), .in_valid(u_valid), .in_hold(u_hold),
    .out_word(f_word), .out_valid(f_valid), .out_hold({1'b0, c_hold}),
    .tag_err(t2_terr), .parity_err(t2_perr));

  assign tree_err = (|t1_terr) | (|t1_perr) | t2_terr | t2_perr;

  // ---------------- clean-up board with spy buffers on its input and output
  svt_word_t ci_word, co_word;
  logic      ci_valid, ci_hold, co_valid, co_hold;
  svt_word_t [1:0]       cs_rdata;
  logic [1:0][SAW-1:0]   cs_wptr;
  logic [1:0]            cs_busy, cs_wrapped, cs_frozen;

  spy_buffer #(.DEPTH(SPY_DEPTH)) u_spy_ci (
    .clk, .rst_n,
    .in_word(f_word[0]), .in_valid(f_valid[0]), .in_hold(c_hold),
    .out_word(ci_word), .out_valid(ci_valid), .out_hold(ci_hold),
    .freeze, .source_mode(spy_source_mode && spy_sel == 6'd48),
    .source_start(spy_source_start && spy_sel == 6'd48), .source_len(spy_source_len),
    .source_busy(cs_busy[0]),
    .host_we(spy_we && spy_sel == 6'd48), .host_addr(spy_addr), .host_wdata(spy_wdata),
    .host_rdata(cs_rdata[0]), .wptr(cs_wptr[0]), .wrapped(cs_wrapped[0]), .frozen(cs_frozen[0]));

  cleanup u_cu (
    .clk, .rst_n, .bx(beam_x), .by(beam_y), .l1_accept,
    .in_word(ci_word), .in_valid(ci_valid), .in_hold(ci_hold),
    .out_word(co_word), .out_valid(co_valid), .out_hold(co_hold),
    .overflow(trk_overflow), .parity_err(cu_perr), .ghost);

  spy_buffer #(.DEPTH(SPY_DEPTH)) u_spy_co (
    .clk, .rst_n,
    .in_word(co_word), .in_valid(co_valid), .in_hold(co_hold),
    .out_word, .out_valid, .out_hold,
    .freeze, .source_mode(spy_source_mode && spy_sel == 6'd49),
    .source_start(spy_source_start && spy_sel == 6'd49), .source_len(spy_source_len),
    .source_busy(cs_busy[1]),
    .host_we(spy_we && spy_sel == 6'd49), .host_addr(spy_addr), .host_wdata(spy_wdata),
    .host_rdata(cs_rdata[1]), .wptr(cs_wptr[1]), .wrapped(cs_wrapped[1]), .frozen(cs_frozen[1]));

  always_comb begin
    if (spy_sel >= 6'd48) begin
      spy_rdata = cs_rdata[spy_sel[0]];
      spy_wptr  = cs_wptr[spy_sel[0]];
    end else begin
      spy_rdata = sl_rdata[spy_sel[5:2]];
      spy_wptr  = sl_wptr[spy_sel[5:2]];
    end
  end

endmodule
