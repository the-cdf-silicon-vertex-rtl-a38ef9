// svt_cable_tx: sending end of an SVT cable.
//
// Passes a board's output stream straight through to the cable and fills in
// the parity bit of each EE word: the XOR of all bits of all data words the
// board sent in that event.  The board only sets the event tag of the EE
// word.  It is purely combinational on the data path; the running parity is
// a register updated on every transfer (valid high and hold low), so it adds
// no latency.  The parity bit per cable-event follows the paper; where the
// bit sits and what it covers is this design's choice.
module svt_cable_tx
  import svt_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  svt_word_t in_word,
  input  logic      in_valid,
  output logic      in_hold,
  output svt_word_t out_word,
  output logic      out_valid,
  input  logic      out_hold
);
  logic par;

  always_comb begin
    out_word = in_word;
    if (in_word.ee) out_word.data[PARITY_BIT] = par;
  end
  assign out_valid = in_valid;
  assign in_hold   = out_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) par <= 1'b0;
    else if (in_valid && !out_hold) par <= in_word.ee ? 1'b0 : (par ^ (^in_word.data));
  end

endmodule
