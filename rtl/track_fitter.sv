// track_fitter: linearized track fit of one slice.
//
// For each track candidate (road word, XFT word, four silicon hit words) it
// computes the track parameters p = (c, phi, d) and the three fit
// constraints chi = (chi0, chi1, chi2) as linear functions of the six
// coordinates x = (c_XFT, phi_XFT, four hits).  The values of p and chi at the
// edge of every pattern, and the pattern's edge coordinates, are precomputed
// and loaded at start of run into the constant memory (the paper's flash
// memory) through const_we.  Using the road ID as the address, six fit_units
// in parallel compute p_j = p_edge_j + (V_j . dx) >>> shift and likewise chi,
// with dx = x - x_edge clipped to 0..255, i.e. 8-bit multiplications.  Then
// chi2 = |chi|^2; a track with chi2 <= chi2_max is sent as three words:
//   w0 {wedge, XFT c, XFT phi}, w1 {c[9:0], phi[10:0]}, w2 {d[10:0], chi2[9:0]}
// (c, phi, d clipped to their fields, chi2 saturated).  The event's EE word
// follows the event's last track.
//
// Timing: a fit takes exactly FIT_CYCLES = 10 cycles from start to result
// (250 ns at a 40 MHz clock, the paper's rate), and the next candidate,
// already collected meanwhile, starts at once, so sustained throughput is one
// candidate per 10 cycles.  The fit equations, the precomputed pattern-edge
// values, 8-bit multiplication in six parallel units and the goodness-of-fit
// cut follow the paper; word layouts, widths and the 40 MHz clock are this
// design's own.
module track_fitter
  import svt_pkg::*;
#(
  parameter int unsigned NROADS     = 32768,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [3:0]                  wedge,
  // constants: coefficient rows (3 of V, then 3 of C), scaling, cut
  input  logic signed [5:0][5:0][7:0] coef,
  input  logic [3:0]                  shift,
  input  logic [25:0]                 chi2_max,
  // per-pattern constants
  input  logic                        const_we,
  input  logic [ROAD_W-1:0]           const_addr,
  input  logic [5:0][15:0]            const_edge,
  input  logic signed [5:0][17:0]     const_base,
  // candidates in, tracks out
  input  svt_word_t                   in_word,
  input  logic                        in_valid,
  output logic                        in_hold,
  output svt_word_t                   out_word,
  output logic                        out_valid,
  input  logic                        out_hold,
  output logic                        parity_err,
  output logic                        fit_start   // one pulse per fit
);
  localparam int unsigned NW = $clog2(NROADS);

  typedef struct packed {
    logic [5:0][15:0]        edg;
    logic signed [5:0][17:0] base;
  } const_t;

  const_t cmem [NROADS];
  const_t cq;

  svt_word_t q_word;
  logic      q_valid, q_pop;

  svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_rx (
    .clk, .rst_n, .in_word, .in_valid, .in_hold,
    .out_word(q_word), .out_valid(q_valid), .out_pop(q_pop), .parity_err
  );

  // ---- collector: gathers one candidate (6 words) or one EE word
  logic [5:0][DATA_W-1:0] col;
  logic [2:0]             ncol;
  logic                   col_full, col_ee;
  logic [TAG_W-1:0]       col_tag;
  logic                   take;       // compute stage takes the collector

  assign q_pop = q_valid && !col_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col      <= '0;
      ncol     <= '0;
      col_full <= 1'b0;
      col_ee   <= 1'b0;
      col_tag  <= '0;
    end else begin
      if (take) begin
        col_full <= 1'b0;
        col_ee   <= 1'b0;
      end
      if (q_pop) begin
        if (q_word.ee) begin
          col_full <= 1'b1;
          col_ee   <= 1'b1;
          col_tag  <= q_word.data[TAG_W-1:0];
          ncol     <= '0;
        end else begin
          col[ncol] <= q_word.data;
          if (q_word.ep || ncol == 3'd5) begin
            col_full <= (ncol == 3'd5);   // a short packet is dropped
            ncol     <= '0;
          end else begin
            ncol <= ncol + 3'd1;
          end
        end
      end
    end
  end

  // ---- compute stage
  // A finished fit waits in its last cycle while the previous track is still
  // being sent (3 words < 10 cycles, so without hold this never stalls).
  localparam int unsigned FIT_CYCLES = 10;
  logic                   busy;
  logic [3:0]             cyc;
  logic [5:0][DATA_W-1:0] work;
  logic [5:0][15:0]       x;
  logic [5:0][7:0]        dx;
  logic                   fstart;
  logic [5:0]             fdone;
  logic signed [5:0][17:0] fres;
  logic [25:0]            chi2;

  // output stage
  logic [2:0][DATA_W-1:0] res_w;
  logic [1:0]             res_n;      // words still to send
  logic                   res_ee;
  logic [TAG_W-1:0]       res_tag;
  logic                   out_free;
  logic                   finishing;
  svt_word_t              o_word;
  logic                   o_valid, o_hold;

  assign out_free = (res_n == '0) && !res_ee;
  // a new candidate starts in the same cycle the previous fit finishes
  assign finishing = busy && (cyc == 4'(FIT_CYCLES-1)) && (res_n == '0);
  assign take      = col_full && (col_ee ? (!busy && out_free) : (!busy || finishing));

  always_ff @(posedge clk) begin
    cq <= cmem[NW'(work[0][ROAD_W-1:0])];
    if (const_we) cmem[NW'(const_addr)] <= '{edg: const_edge, base: const_base};
  end

  // coordinates: XFT c (sign-offset), XFT phi, four silicon centroids
  always_comb begin
    x[0] = 16'(work[1][16:11] ^ 6'h20);
    x[1] = 16'(work[1][10:0]);
    for (int i = 2; i < 6; i++) x[i] = 16'(work[i][COORD_W-1:0]);
    for (int i = 0; i < 6; i++) begin
      if (x[i] < cq.edg[i])                 dx[i] = 8'd0;
      else if (x[i] - cq.edg[i] > 16'd255)  dx[i] = 8'd255;
      else                                   dx[i] = 8'(x[i] - cq.edg[i]);
    end
  end

  assign fstart    = busy && (cyc == 4'd1);
  assign fit_start = fstart;

  for (genvar j = 0; j < 6; j++) begin : g_fit
    fit_unit #(.NIN(6)) u_fit (
      .clk, .rst_n, .start(fstart), .base(cq.base[j]), .dx, .coef(coef[j]),
      .shift, .done(fdone[j]), .result(fres[j]));
  end

  function automatic logic [25:0] sq(logic signed [17:0] v);
    logic signed [12:0] s;
    s = (v > 18'sd4095) ? 13'sd4095 : (v < -18'sd4095) ? -13'sd4095 : 13'(v);
    return 26'(s * s);
  endfunction

  function automatic logic [DATA_W-1:0] clip_s(logic signed [17:0] v, int unsigned w);
    logic signed [17:0] hi, lo;
    hi = 18'sd1 <<< (w-1);
    lo = -hi;
    hi = hi - 18'sd1;
    if (v > hi) v = hi;
    if (v < lo) v = lo;
    return DATA_W'(v) & DATA_W'((1 << w) - 1);
  endfunction

  logic [9:0] chi2_sat;
  assign chi2_sat = (chi2 > 26'd1023) ? 10'd1023 : chi2[9:0];

  logic [DATA_W-1:0] c_clip, d_clip;
  assign c_clip = clip_s(fres[0], 10);
  assign d_clip = clip_s(fres[2], 11);

  logic [10:0] phi_clip;
  assign phi_clip = ($signed(fres[1]) < 0) ? 11'd0 : ($signed(fres[1]) > 18'sd2047) ? 11'd2047 : 11'(fres[1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cyc     <= '0;
      work    <= '0;
      chi2    <= '0;
      res_w   <= '0;
      res_n   <= '0;
      res_ee  <= 1'b0;
      res_tag <= '0;
    end else begin
      if (!o_hold && o_valid) begin
        if (res_n != '0) res_n <= res_n - 2'd1;
        else             res_ee <= 1'b0;
      end
      if (busy) begin
        if (cyc != 4'(FIT_CYCLES-1)) cyc <= cyc + 4'd1;
        if (cyc == 4'd8) chi2 <= sq(fres[3]) + sq(fres[4]) + sq(fres[5]);
        if (finishing) begin
          busy <= 1'b0;
          if (chi2 <= chi2_max) begin
            res_w[0] <= {wedge, work[1][16:0]};
            res_w[1] <= {c_clip[9:0], phi_clip};
            res_w[2] <= {d_clip[10:0], chi2_sat};
            res_n    <= 2'd3;
          end
        end
      end
      if (take) begin
        if (col_ee) begin
          res_ee  <= 1'b1;
          res_tag <= col_tag;
        end else begin
          busy <= 1'b1;
          cyc  <= '0;
          work <= col;
        end
      end
    end
  end

  always_comb begin
    o_valid = (res_n != '0) || res_ee;
    if (res_n != '0) o_word = make_word(res_w[3 - res_n], res_n == 2'd1, 1'b0);
    else             o_word = make_ee(res_tag);
  end

  // the six fit units finish together, two cycles before the cut
  assert property (@(posedge clk) disable iff (!rst_n) (busy && cyc == 4'd8) |-> (&fdone))
    else $error("track_fitter: fit units not done in time");

  svt_cable_tx u_tx (
    .clk, .rst_n,
    .in_word(o_word), .in_valid(o_valid), .in_hold(o_hold),
    .out_word, .out_valid, .out_hold
  );

endmodule
