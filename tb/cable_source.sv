// cable_source: testbench driver for one SVT cable.
// Words queued with push() are sent in order; the strobe is dropped at
// random on GAP_PCT percent of cycles.  A word counts as sent on a rising
// edge where valid is high and hold is low.  Outputs change only through
// nonblocking assignments on the rising edge, like a registered sender.
module cable_source
  import svt_pkg::*;
#(
  parameter int GAP_PCT = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  output svt_word_t word,
  output logic      valid,
  input  logic      hold
);
  svt_word_t q[$];
  int        sent = 0;

  task automatic push(svt_word_t w);
    q.push_back(w);
  endtask

  function automatic int pending();
    return q.size();
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      word  <= '0;
    end else begin
      automatic bit popped = 1'b0;
      if (valid && !hold) begin
        void'(q.pop_front());
        sent++;
        popped = 1'b1;
      end
      if (q.size() > 0 && ($urandom_range(0, 99) >= GAP_PCT)) begin
        valid <= 1'b1;
        word  <= q[0];
      end else begin
        valid <= 1'b0;
      end
    end
  end
endmodule
