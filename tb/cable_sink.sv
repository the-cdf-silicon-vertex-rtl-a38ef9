// cable_sink: testbench receiver for one SVT cable.
// Raises hold at random on HOLD_PCT percent of cycles (or always while
// force_hold is set) and stores every accepted word, with the cycle it
// arrived in, in got[] / when[].
module cable_sink
  import svt_pkg::*;
#(
  parameter int HOLD_PCT = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  svt_word_t word,
  input  logic      valid,
  output logic      hold
);
  svt_word_t got[$];
  longint    when[$];
  longint    cycle = 0;
  bit        force_hold = 0;
  int        hold_cycles = 0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= 1'b0;
    end else begin
      cycle++;
      if (valid && !hold) begin
        got.push_back(word);
        when.push_back(cycle);
      end
      if (hold) hold_cycles++;
      hold <= force_hold || ($urandom_range(0, 99) < HOLD_PCT);
    end
  end
endmodule
