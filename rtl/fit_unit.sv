// fit_unit: one of the six parallel fit engines of the track fitter.
//
// Computes one fit output (a track parameter or a fit constraint) as a
// correction to its value precomputed at the pattern edge:
//   result = base + (sum_i coef[i] * dx[i]) >>> shift
// over the NIN = 6 fit inputs (XFT curvature, XFT phi, four silicon hits).
// dx[i] are the 8-bit unsigned offsets of the inputs from the pattern edge,
// coef[i] signed 8-bit coefficients, so every product is an 8-bit by 8-bit
// multiplication.  One multiply-accumulate per clock: start latches the
// operands, and result is valid with done high NIN cycles later, until the
// next start.  The correction-from-pattern-edge scheme, 8-bit multiplication
// and six units in parallel follow the paper; the serial schedule, the
// shift and the widths are this design's choice.
module fit_unit #(
  parameter int unsigned NIN    = 6,
  parameter int unsigned BASE_W = 18,
  parameter int unsigned ACC_W  = 20
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic signed [BASE_W-1:0]      base,
  input  logic [NIN-1:0][7:0]           dx,
  input  logic signed [NIN-1:0][7:0]    coef,
  input  logic [3:0]                    shift,
  output logic                          done,
  output logic signed [BASE_W-1:0]      result
);
  logic signed [BASE_W-1:0]   base_q;
  logic [NIN-1:0][7:0]        dx_q;
  logic [NIN-1:0][7:0]        coef_q;
  logic [3:0]                 shift_q;
  logic signed [ACC_W-1:0]    acc;
  logic [$clog2(NIN+1)-1:0]   k;
  logic                       busy;
  logic signed [16:0]         prod;

  assign prod = $signed(coef_q[k]) * $signed({1'b0, dx_q[k]});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q  <= '0;
      dx_q    <= '0;
      coef_q  <= '0;
      shift_q <= '0;
      acc     <= '0;
      k       <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else if (start) begin
      base_q  <= base;
      dx_q    <= dx;
      coef_q  <= coef;
      shift_q <= shift;
      acc     <= '0;
      k       <= '0;
      busy    <= 1'b1;
      done    <= 1'b0;
    end else if (busy) begin
      acc <= acc + ACC_W'(prod);
      if (k == ($clog2(NIN+1))'(NIN-1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
      k <= k + 1'b1;
    end
  end

  assign result = base_q + BASE_W'(acc >>> shift_q);

endmodule
