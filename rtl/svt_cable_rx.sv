// svt_cable_rx: receiving end of an SVT cable.
//
// A FIFO that accepts a word on each clock edge where the sender's strobe
// (in_valid) is high and hold is low.  Hold is the cable's flow-control line:
// it is raised while the FIFO is full, so the sender stops and no word is
// ever lost.  The receiver also recomputes the parity of every cable-event
// (XOR of all bits of the data words of the event, EE word excluded) and
// compares it with the parity bit carried in the EE word; a mismatch gives a
// one-cycle parity_err pulse when the EE word is written.
//
// The read side is a first-word-fall-through FIFO: out_word is valid while
// out_valid is high and is consumed by out_pop.  Latency from input to output
// is one cycle.  The strobe/hold pair and the per-event parity bit come from
// the paper; the FIFO depth and the exact parity definition are this
// design's choice.
module svt_cable_rx
  import svt_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // cable side
  input  svt_word_t in_word,
  input  logic      in_valid,
  output logic      in_hold,
  // board side
  output svt_word_t out_word,
  output logic      out_valid,
  input  logic      out_pop,
  // diagnostics
  output logic      parity_err
);
  localparam int unsigned AW = $clog2(DEPTH);

  svt_word_t          mem [DEPTH];
  logic [AW-1:0]      wptr, rptr;
  logic [AW:0]        count;
  logic               wr, rd;
  logic               par;

  assign in_hold   = (count == (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_word  = mem[rptr];
  assign wr        = in_valid && !in_hold;
  assign rd        = out_pop && out_valid;

  always_ff @(posedge clk) begin
    if (wr) mem[wptr] <= in_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      par        <= 1'b0;
      parity_err <= 1'b0;
    end else begin
      parity_err <= 1'b0;
      if (wr) begin
        wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
        if (in_word.ee) begin
          parity_err <= (in_word.data[PARITY_BIT] != par);
          par        <= 1'b0;
        end else begin
          par <= par ^ (^in_word.data);
        end
      end
      if (rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

  // The board never pops an empty FIFO.
  assert property (@(posedge clk) disable iff (!rst_n) out_pop |-> out_valid)
    else $error("svt_cable_rx: pop while empty");

endmodule
