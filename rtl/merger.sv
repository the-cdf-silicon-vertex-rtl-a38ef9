// merger: the universal SVT fan-in / fan-out board.
//
// Concatenates, event by event, the data of up to NIN SVT cable inputs and
// sends the result on NOUT identical cable outputs.  For each event the
// merger copies the data words of input 0 up to (not including) its EE word,
// then those of input 1, and so on over the inputs enabled in in_enable, then
// sends a single EE word.  The merged EE carries the event tag of the first
// enabled input; if any enabled input's tag differs, tag_err pulses (the
// backplane error line).  Each input has its own cable receiver, which checks
// the parity bit of every input cable-event (parity_err).  The output parity
// is recomputed by the cable transmitter.
//
// Outputs advance only when no output holds, so all outputs see the same
// words in the same cycles.  One word moves per cycle at most.  Four inputs,
// two outputs, event-ID comparison and parity come from the paper; the order
// in which inputs are concatenated (lowest enabled input first) is this
// design's choice.
module merger
  import svt_pkg::*;
#(
  parameter int unsigned NIN   = 4,
  parameter int unsigned NOUT  = 2,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NIN-1:0]        in_enable,
  input  svt_word_t [NIN-1:0]   in_word,
  input  logic [NIN-1:0]        in_valid,
  output logic [NIN-1:0]        in_hold,
  output svt_word_t [NOUT-1:0]  out_word,
  output logic [NOUT-1:0]       out_valid,
  input  logic [NOUT-1:0]       out_hold,
  output logic                  tag_err,
  output logic                  parity_err
);
  localparam int unsigned IW = (NIN > 1) ? $clog2(NIN) : 1;

  svt_word_t [NIN-1:0] q_word;
  logic [NIN-1:0]      q_valid, q_pop, q_perr;

  for (genvar i = 0; i < NIN; i++) begin : g_rx
    svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_rx (
      .clk, .rst_n,
      .in_word(in_word[i]), .in_valid(in_valid[i]), .in_hold(in_hold[i]),
      .out_word(q_word[i]), .out_valid(q_valid[i]), .out_pop(q_pop[i]),
      .parity_err(q_perr[i])
    );
  end

  logic [IW-1:0]     cur;        // input being copied
  logic              sending_ee; // all inputs done, EE pending
  logic [TAG_W-1:0]  first_tag;
  logic              have_tag;
  logic              mism;
  logic              any_hold;
  svt_word_t         m_word;
  logic              m_valid;
  logic              tx_hold;
  svt_word_t         tx_word;
  logic              tx_valid;
  logic [IW-1:0]     nxt;
  logic              last;

  assign any_hold = |out_hold;

  // next enabled input after cur, and whether cur is the last enabled one
  always_comb begin
    nxt  = cur;
    last = 1'b1;
    for (int k = NIN-1; k >= 0; k--) begin
      if (k > int'(cur) && in_enable[k]) begin
        nxt  = IW'(k);
        last = 1'b0;
      end
    end
  end

  logic cur_en;
  assign cur_en = in_enable[cur];

  always_comb begin
    m_word  = q_word[cur];
    m_valid = 1'b0;
    q_pop   = '0;
    if (sending_ee) begin
      m_word  = make_ee(first_tag);
      m_valid = 1'b1;
    end else if (cur_en && q_valid[cur]) begin
      if (!q_word[cur].ee) begin
        m_valid = 1'b1;
        q_pop[cur] = !tx_hold;
      end else begin
        q_pop[cur] = 1'b1;         // swallow the input's EE word
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur        <= '0;
      sending_ee <= 1'b0;
      first_tag  <= '0;
      have_tag   <= 1'b0;
      mism       <= 1'b0;
      tag_err    <= 1'b0;
    end else begin
      tag_err <= 1'b0;
      if (sending_ee) begin
        if (!tx_hold) begin
          sending_ee <= 1'b0;
          tag_err    <= mism;
          mism       <= 1'b0;
          have_tag   <= 1'b0;
          cur        <= '0;
          for (int k = NIN-1; k >= 0; k--) if (in_enable[k]) cur <= IW'(k);
        end
      end else if (!cur_en) begin
        // skip a disabled input; with no input enabled nothing happens
        if (!last) cur <= nxt;
        else if (in_enable != '0) begin
          cur <= '0;
          for (int k = NIN-1; k >= 0; k--) if (in_enable[k]) cur <= IW'(k);
        end
      end else if (q_valid[cur] && q_word[cur].ee) begin
        if (!have_tag) begin
          first_tag <= q_word[cur].data[TAG_W-1:0];
          have_tag  <= 1'b1;
        end else if (q_word[cur].data[TAG_W-1:0] != first_tag) begin
          mism <= 1'b1;
        end
        if (last) sending_ee <= 1'b1;
        else      cur        <= nxt;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) parity_err <= 1'b0;
    else        parity_err <= |q_perr;
  end

  svt_cable_tx u_tx (
    .clk, .rst_n,
    .in_word(m_word), .in_valid(m_valid), .in_hold(tx_hold),
    .out_word(tx_word), .out_valid(tx_valid), .out_hold(any_hold)
  );

  for (genvar o = 0; o < NOUT; o++) begin : g_out
    assign out_word[o]  = tx_word;
    assign out_valid[o] = tx_valid && !any_hold;
  end

endmodule
