// am_board: the associative-memory pattern recognition of one 30 degree
// slice: NCHIPS AM chips of 128 patterns each (32K patterns by default).
//
// Input: the slice's merged stream of silicon hits and XFT tracks, one event
// ending with an EE word.  Each word is turned into (AM layer, superstrip) by
// ss_compute and broadcast in the same cycle to all chips, one hit per
// clock.  At the EE word all chips latch their matched patterns; the board
// then enumerates the matched patterns, one per clock, lowest chip first,
// and sends each as a road word (pattern ID = chip * NPATT + address), then
// an EE word with the input event's tag.  Hits of the next event are not
// taken until the roads of this one have been sent.
//
// Patterns are loaded with pat_we / pat_id / pat_data.  Time per event:
// one cycle per input word, two cycles turnaround, one cycle per road.
// The chip count, broadcast of binned hits and the linear timing follow the
// paper; the road ordering across chips is this design's choice.
module am_board
  import svt_pkg::*;
#(
  parameter int unsigned NCHIPS     = 256,
  parameter int unsigned NPATT      = 128,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  bin_cfg_t                      cfg,
  input  logic                          pat_we,
  input  logic [ROAD_W-1:0]             pat_id,
  input  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data,
  input  svt_word_t                     in_word,
  input  logic                          in_valid,
  output logic                          in_hold,
  output svt_word_t                     out_word,
  output logic                          out_valid,
  input  logic                          out_hold,
  output logic                          parity_err
);
  localparam int unsigned PW = $clog2(NPATT);
  localparam int unsigned CW = (NCHIPS > 1) ? $clog2(NCHIPS) : 1;

  svt_word_t q_word;
  logic      q_valid, q_pop;

  svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_rx (
    .clk, .rst_n, .in_word, .in_valid, .in_hold,
    .out_word(q_word), .out_valid(q_valid), .out_pop(q_pop), .parity_err
  );

  typedef enum logic [1:0] {S_HITS, S_LATCH, S_ROADS, S_EE} state_t;
  state_t           state;
  logic [TAG_W-1:0] tag;

  logic              h_valid;
  logic [2:0]        h_layer;
  logic [SS_W-1:0]   h_ss;
  logic [COORD_W-1:0] h_coord;
  logic              eoe;

  ss_compute u_ss (.cfg, .hit(q_word.data), .valid(h_valid), .am_layer(h_layer),
                   .ss(h_ss), .coord(h_coord));

  logic [NCHIPS-1:0]         c_valid, c_pop;
  logic [NCHIPS-1:0][PW-1:0] c_addr;
  logic                      any_road;
  logic [CW-1:0]             sel;

  assign q_pop = (state == S_HITS) && q_valid;
  assign eoe   = q_pop && q_word.ee;

  for (genvar k = 0; k < NCHIPS; k++) begin : g_chip
    am_chip #(.NPATT(NPATT), .NLAYERS(AM_LAYERS)) u_chip (
      .clk, .rst_n,
      .pat_we(pat_we && (pat_id[ROAD_W-1:PW] == (ROAD_W-PW)'(k))),
      .pat_addr(pat_id[PW-1:0]), .pat_data,
      .hit_valid(q_pop && !q_word.ee && h_valid), .hit_layer(h_layer), .hit_ss(h_ss),
      .end_event(eoe),
      .road_valid(c_valid[k]), .road_addr(c_addr[k]), .road_pop(c_pop[k])
    );
  end

  always_comb begin
    any_road = |c_valid;
    sel      = '0;
    for (int k = NCHIPS-1; k >= 0; k--) if (c_valid[k]) sel = CW'(k);
  end

  svt_word_t o_word;
  logic      o_valid, o_hold;

  always_comb begin
    o_word  = make_word(DATA_W'({sel, c_addr[sel]}), 1'b1, 1'b0);
    o_valid = 1'b0;
    c_pop   = '0;
    if (state == S_ROADS && any_road) begin
      o_valid    = 1'b1;
      c_pop[sel] = !o_hold;
    end else if (state == S_EE) begin
      o_word  = make_ee(tag);
      o_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_HITS;
      tag   <= '0;
    end else begin
      unique case (state)
        S_HITS:  if (eoe) begin
                   tag   <= q_word.data[TAG_W-1:0];
                   state <= S_LATCH;
                 end
        S_LATCH: state <= S_ROADS;
        S_ROADS: if (!any_road) state <= S_EE;
        S_EE:    if (!o_hold) state <= S_HITS;
        default: state <= S_HITS;
      endcase
    end
  end

  svt_cable_tx u_tx (
    .clk, .rst_n,
    .in_word(o_word), .in_valid(o_valid), .in_hold(o_hold),
    .out_word, .out_valid, .out_hold
  );

endmodule
