// hit_buffer: turns the pattern IDs (roads) found by the AM board into
// track candidates carrying the actual hits.
//
// Phase 1 (hits): the slice's hit stream (the same one the AM board sees) is
// stored by superstrip: each hit is binned with ss_compute and written into
// the bucket of its (AM layer, superstrip), up to MAXH hits per bucket
// (further hits are dropped and counted in overflow).  Phase 2 (roads): for
// each road word from the AM board the buffer looks up the road's five
// superstrips in its own copy of the pattern bank and sends one candidate
// packet for every combination of one hit per layer: the road word, the XFT
// track word, then the four silicon hit words, EP on the last.  After the
// road stream's EE word it sends an EE with the same tag and empties all
// buckets in one cycle.
//
// One input word per clock in phase 1; six output words per combination in
// phase 2.  The paper names track candidates as a data type on the SVT cable
// and says the fit uses the hits of each candidate's pattern; how the hits
// are kept and enumerated is this design's own.
module hit_buffer
  import svt_pkg::*;
#(
  parameter int unsigned NROADS     = 32768,
  parameter int unsigned MAXH       = 4,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  bin_cfg_t                       cfg,
  input  logic                           pat_we,
  input  logic [ROAD_W-1:0]              pat_id,
  input  logic [AM_LAYERS-1:0][SS_W-1:0] pat_data,
  // hits
  input  svt_word_t                      hit_word,
  input  logic                           hit_valid,
  output logic                           hit_hold,
  // roads
  input  svt_word_t                      road_word,
  input  logic                           road_valid,
  output logic                           road_hold,
  // candidates
  output svt_word_t                      out_word,
  output logic                           out_valid,
  input  logic                           out_hold,
  output logic                           overflow,
  output logic                           parity_err
);
  localparam int unsigned NB  = AM_LAYERS * (2**SS_W);   // buckets
  localparam int unsigned BW  = $clog2(NB);
  localparam int unsigned HW  = $clog2(MAXH);
  localparam int unsigned NW  = $clog2(NROADS);
  localparam int unsigned SA  = BW + HW;                  // store address

  svt_word_t hq_word, rq_word;
  logic      hq_valid, hq_pop, rq_valid, rq_pop, hperr, rperr;

  svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_hrx (
    .clk, .rst_n, .in_word(hit_word), .in_valid(hit_valid), .in_hold(hit_hold),
    .out_word(hq_word), .out_valid(hq_valid), .out_pop(hq_pop), .parity_err(hperr));
  svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_rrx (
    .clk, .rst_n, .in_word(road_word), .in_valid(road_valid), .in_hold(road_hold),
    .out_word(rq_word), .out_valid(rq_valid), .out_pop(rq_pop), .parity_err(rperr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) parity_err <= 1'b0;
    else        parity_err <= hperr | rperr;
  end

  // pattern bank copy: superstrip per AM layer for each road
  logic [AM_LAYERS-1:0][SS_W-1:0] pattern [NROADS];
  always_ff @(posedge clk) if (pat_we) pattern[NW'(pat_id)] <= pat_data;

  // hit buckets
  logic [DATA_W-1:0] store [NB*MAXH];
  logic [HW:0]       cnt   [NB];

  typedef enum logic [1:0] {S_HITS, S_ROADS, S_EE} state_t;
  state_t state;

  logic               b_valid;
  logic [2:0]         b_layer;
  logic [SS_W-1:0]    b_ss;
  logic [COORD_W-1:0] b_coord;
  logic [BW-1:0]      wb;

  ss_compute u_ss (.cfg, .hit(hq_word.data), .valid(b_valid), .am_layer(b_layer),
                   .ss(b_ss), .coord(b_coord));
  assign wb = BW'(b_layer) * BW'(2**SS_W) + BW'(b_ss);

  // road enumeration
  logic [AM_LAYERS-1:0][SS_W-1:0] rpat;
  logic [AM_LAYERS-1:0][BW-1:0]   rb;
  logic [AM_LAYERS-1:0][HW:0]     rn;
  logic [AM_LAYERS-1:0][HW-1:0]   idx;
  logic [2:0]                     wsel;     // 0 road word, 1..5 layer words
  logic                           empty_road;
  logic                           last_combo;
  logic [TAG_W-1:0]               tag;

  assign rpat = pattern[NW'(rq_word.data[ROAD_W-1:0])];
  always_comb begin
    empty_road = 1'b0;
    last_combo = 1'b1;
    for (int l = 0; l < AM_LAYERS; l++) begin
      rb[l] = BW'(l) * BW'(2**SS_W) + BW'(rpat[l]);
      rn[l] = cnt[rb[l]];
      if (rn[l] == '0) empty_road = 1'b1;
      if ((HW+1)'(idx[l]) != rn[l] - 1'b1) last_combo = 1'b0;
    end
  end

  svt_word_t o_word;
  logic      o_valid, o_hold;

  always_comb begin
    o_word  = '0;
    o_valid = 1'b0;
    hq_pop  = (state == S_HITS) && hq_valid;
    rq_pop  = 1'b0;
    unique case (state)
      S_ROADS: if (rq_valid) begin
        if (rq_word.ee) begin
          rq_pop = 1'b1;
        end else if (empty_road) begin
          rq_pop = 1'b1;
        end else begin
          o_valid = 1'b1;
          if (wsel == 3'd0) o_word = make_word(rq_word.data, 1'b0, 1'b0);
          else              o_word = make_word(store[SA'(rb[wsel-3'd1]) * SA'(MAXH) + SA'(idx[wsel-3'd1])],
                                               wsel == 3'd5, 1'b0);
          rq_pop = !o_hold && (wsel == 3'd5) && last_combo;
        end
      end
      S_EE: begin
        o_word  = make_ee(tag);
        o_valid = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (hq_pop && !hq_word.ee && b_valid && cnt[wb] < (HW+1)'(MAXH))
      store[SA'(wb) * SA'(MAXH) + SA'(cnt[wb])] <= hq_word.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_HITS;
      wsel     <= '0;
      idx      <= '0;
      tag      <= '0;
      overflow <= 1'b0;
      for (int b = 0; b < NB; b++) cnt[b] <= '0;
    end else begin
      unique case (state)
        S_HITS: if (hq_pop) begin
          if (hq_word.ee) state <= S_ROADS;
          else if (b_valid) begin
            if (cnt[wb] < (HW+1)'(MAXH)) cnt[wb] <= cnt[wb] + 1'b1;
            else                          overflow <= 1'b1;
          end
        end
        S_ROADS: if (rq_valid) begin
          if (rq_word.ee) begin
            tag   <= rq_word.data[TAG_W-1:0];
            state <= S_EE;
          end else if (!empty_road && !o_hold) begin
            if (wsel != 3'd5) begin
              wsel <= wsel + 3'd1;
            end else begin
              wsel <= '0;
              // odometer over the hits of the five layers
              if (last_combo) idx <= '0;
              else begin : odo
                logic carry;
                carry = 1'b1;
                for (int l = AM_LAYERS-1; l >= 0; l--) begin
                  if (carry) begin
                    if ((HW+1)'(idx[l]) == rn[l] - 1'b1) idx[l] <= '0;
                    else begin
                      idx[l] <= idx[l] + 1'b1;
                      carry = 1'b0;
                    end
                  end
                end
              end
            end
          end
        end
        S_EE: if (!o_hold) begin
          state <= S_HITS;
          for (int b = 0; b < NB; b++) cnt[b] <= '0;
        end
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
