// hit_finder: turns the sparsified strip list of one silicon plane into
// charge-weighted hit centroids.
//
// Input: strip words (channel, pulse height) of one plane, channels in
// increasing order, ending with an EE word.  Strips whose pulse height is at
// least `threshold` and whose channels are adjacent form a cluster, up to
// MAX_WIDTH strips; a gap, a strip below threshold, a full cluster or the end
// of the event closes it.  For each closed cluster one hit word is sent:
// centroid = 8 * sum(ch*ph) / sum(ph), i.e. the charge-weighted mean channel
// in units of 1/8 strip, tagged with the plane's layer and barrel number.
// The EE word is forwarded after the last hit with the same tag.
//
// One strip is taken per clock; a hit appears one cycle after the strip that
// closes its cluster.  Output stalls on hold.  The paper gives the function
// (sparsified channel numbers and pulse heights to charge-weighted centroids,
// one unit per plane); the clustering rule, threshold and widths are this
// design's own.
module hit_finder
  import svt_pkg::*;
#(
  parameter int unsigned MAX_WIDTH  = 8,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] layer,
  input  logic [2:0] barrel,
  input  logic [7:0] threshold,
  input  svt_word_t  in_word,
  input  logic       in_valid,
  output logic       in_hold,
  output svt_word_t  out_word,
  output logic       out_valid,
  input  logic       out_hold,
  output logic       parity_err
);
  localparam int unsigned SUMW = 24;  // sum(ch*ph): 12+8 bits + width
  localparam int unsigned QW   = 12;  // sum(ph)

  svt_word_t q_word;
  logic      q_valid, q_pop;

  svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_rx (
    .clk, .rst_n, .in_word, .in_valid, .in_hold,
    .out_word(q_word), .out_valid(q_valid), .out_pop(q_pop), .parity_err
  );

  logic            open_c;
  logic [11:0]     last_ch;
  logic [3:0]      width;
  logic [SUMW-1:0] sum_xq;
  logic [QW-1:0]   sum_q;

  svt_word_t o_word;
  logic      o_valid, o_hold;
  logic      o_free;

  logic [11:0] ch;
  logic [7:0]  ph;
  logic        above, extend;
  logic [SUMW+2:0] num;
  logic [COORD_W-1:0] centroid;

  assign ch     = q_word.data[19:8];
  assign ph     = q_word.data[7:0];
  assign above  = (ph >= threshold) && (ph != 8'd0);
  assign extend = open_c && (ch == last_ch + 12'd1) && (width < 4'(MAX_WIDTH));
  assign o_free = !o_valid || !o_hold;

  assign num      = {sum_xq, 3'b000};
  assign centroid = COORD_W'(num / (SUMW+3)'(sum_q));

  function automatic svt_word_t hit_word(logic [2:0] l, logic [2:0] b, logic [COORD_W-1:0] c);
    return make_word({l, b, c}, 1'b1, 1'b0);
  endfunction

  // pop the input word unless it is an EE that must wait for a final hit
  assign q_pop = q_valid && o_free && !(q_word.ee && open_c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_c  <= 1'b0;
      last_ch <= '0;
      width   <= '0;
      sum_xq  <= '0;
      sum_q   <= '0;
      o_valid <= 1'b0;
      o_word  <= '0;
    end else begin
      if (o_valid && !o_hold) o_valid <= 1'b0;
      if (q_valid && o_free) begin
        if (q_word.ee) begin
          o_valid <= 1'b1;
          if (open_c) begin
            o_word <= hit_word(layer, barrel, centroid);
            open_c <= 1'b0;
          end else begin
            o_word <= q_word;
          end
        end else if (above && extend) begin
          last_ch <= ch;
          width   <= width + 4'd1;
          sum_xq  <= sum_xq + SUMW'(ch) * SUMW'(ph);
          sum_q   <= sum_q + QW'(ph);
        end else begin
          if (open_c) begin
            o_word  <= hit_word(layer, barrel, centroid);
            o_valid <= 1'b1;
          end
          open_c  <= above;
          last_ch <= ch;
          width   <= 4'd1;
          sum_xq  <= SUMW'(ch) * SUMW'(ph);
          sum_q   <= QW'(ph);
        end
      end
    end
  end

  svt_cable_tx u_tx (
    .clk, .rst_n,
    .in_word(o_word), .in_valid(o_valid), .in_hold(o_hold),
    .out_word, .out_valid, .out_hold
  );

endmodule
