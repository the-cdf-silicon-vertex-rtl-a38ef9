// cleanup: the final SVT board (ghost removal, beam-offset subtraction and
// processing-time recording).
//
// Input: the merged fitted-track stream of all slices, three-word track
// packets per event and one EE word.  Each track is keyed by its first word
// (slice number and XFT track).  Tracks of one event are kept in a table of
// MAXTRK entries: a track whose key is already in the table replaces the
// stored one only if its chi2 is smaller, so at most one SVT track leaves
// per XFT track.  At the EE word the table is sent out.  Each track's
// impact parameter d is corrected for the beam position (bx, by), given by
// the beam-finding software, as
//   d' = d - (bx * sin(phi) - by * cos(phi)) >>> 14
// where phi = slice * 30 deg + local phi and sin/cos come from a 768-entry
// table (Q1.14) computed at elaboration.  After the tracks a one-word packet
// carries the event's processing time: the cycles from the L1 accept pulse
// (queued in a 4-deep FIFO, one entry per front-end event buffer) to the
// arrival of the EE word.  Then the EE word with the input tag is sent.
//
// Table search and update take one cycle per track; output is one word per
// cycle.  Ghost removal, beam subtraction and timing recording follow the
// paper; the chi2 criterion for choosing among duplicates, the table size,
// the timing-word format and the sign convention of d are this design's.
module cleanup
  import svt_pkg::*;
#(
  parameter int unsigned MAXTRK     = 64,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic signed [11:0] bx,
  input  logic signed [11:0] by,
  input  logic               l1_accept,
  input  svt_word_t          in_word,
  input  logic               in_valid,
  output logic               in_hold,
  output svt_word_t          out_word,
  output logic               out_valid,
  input  logic               out_hold,
  output logic               overflow,
  output logic               parity_err,
  output logic               ghost        // pulses when a duplicate is removed
);
  localparam int unsigned TW    = $clog2(MAXTRK);
  localparam int unsigned NTAB  = 768;          // 12 slices x 64 phi bins
  localparam longint      TWO_PI_Q30 = 64'd6746518852;

  // sin(x) for 0 <= x <= pi/2, x in Q30, result in Q14 (Taylor series)
  function automatic longint sin_q(longint x);
    longint x2, t, s;
    x2 = (x * x) >>> 30;
    t  = x;
    s  = x;
    for (int n = 1; n <= 5; n++) begin
      t = -((t * x2) >>> 30) / longint'((2*n) * (2*n+1));
      s = s + t;
    end
    return (s + (64'sd1 <<< 15)) >>> 16;
  endfunction

  function automatic logic [NTAB-1:0][15:0] gen_sin_tab();
    logic [NTAB-1:0][15:0] tab;
    for (int i = 0; i < NTAB; i++) begin
      int j;
      longint v;
      if (i < 192)      begin j = i;       v =  sin_q(longint'(j) * TWO_PI_Q30 / longint'(NTAB)); end
      else if (i < 384) begin j = 384 - i; v =  sin_q(longint'(j) * TWO_PI_Q30 / longint'(NTAB)); end
      else if (i < 576) begin j = i - 384; v = -sin_q(longint'(j) * TWO_PI_Q30 / longint'(NTAB)); end
      else              begin j = 768 - i; v = -sin_q(longint'(j) * TWO_PI_Q30 / longint'(NTAB)); end
      tab[i] = 16'(v);
    end
    return tab;
  endfunction

  localparam logic [NTAB-1:0][15:0] SIN_TAB = gen_sin_tab();

  svt_word_t q_word;
  logic      q_valid, q_pop;

  svt_cable_rx #(.DEPTH(FIFO_DEPTH)) u_rx (
    .clk, .rst_n, .in_word, .in_valid, .in_hold,
    .out_word(q_word), .out_valid(q_valid), .out_pop(q_pop), .parity_err
  );

  // ---- L1 accept time stamps
  logic [19:0]      now;
  logic [3:0][19:0] l1_t;
  logic [1:0]       l1_wp, l1_rp;
  logic [2:0]       l1_n;
  logic             l1_pop;

  // ---- track table
  logic [MAXTRK-1:0]              t_valid;
  logic [MAXTRK-1:0][DATA_W-1:0]  t_key, t_w1, t_w2;
  logic [TW:0]                    t_n;

  typedef enum logic [1:0] {S_IN, S_OUT, S_TIME, S_EE} state_t;
  state_t            state;
  logic [1:0]        nw;               // words of the current packet
  logic [DATA_W-1:0] k0, k1;
  logic [TW:0]       oi;               // output index
  logic [1:0]        ow;               // output word within track
  logic [TAG_W-1:0]  tag;
  logic [19:0]       ptime;

  // search
  logic          hit;
  logic [TW-1:0] hit_i;
  always_comb begin
    hit   = 1'b0;
    hit_i = '0;
    for (int i = MAXTRK-1; i >= 0; i--)
      if (t_valid[i] && t_key[i] == k0) begin
        hit   = 1'b1;
        hit_i = TW'(i);
      end
  end

  // beam correction of the entry being sent
  logic [3:0]          o_wedge;
  logic [10:0]         o_phi;
  logic [9:0]          o_idx;
  logic signed [15:0]  s_v, c_v;
  logic signed [31:0]  corr;
  logic signed [11:0]  d_in;
  logic signed [12:0]  d_out;
  logic [10:0]         d_sat;

  assign o_wedge = t_key[oi[TW-1:0]][20:17];
  assign o_phi   = t_w1[oi[TW-1:0]][10:0];
  assign o_idx   = 10'(o_wedge) * 10'd64 + 10'(o_phi[10:5]);
  assign s_v     = SIN_TAB[o_idx];
  assign c_v     = SIN_TAB[(o_idx >= 10'd576) ? o_idx - 10'd576 : o_idx + 10'd192];
  assign corr    = (32'(bx) * 32'(s_v) - 32'(by) * 32'(c_v)) >>> 14;
  assign d_in    = 12'($signed(t_w2[oi[TW-1:0]][20:10]));
  assign d_out   = 13'(d_in) - 13'(corr);
  assign d_sat   = (d_out > 13'sd1023) ? 11'd1023 : (d_out < -13'sd1024) ? 11'h400 : 11'(d_out);

  svt_word_t o_word;
  logic      o_valid, o_hold;

  always_comb begin
    o_word  = '0;
    o_valid = 1'b0;
    unique case (state)
      S_OUT: if (oi != (TW+1)'(MAXTRK) && t_valid[oi[TW-1:0]]) begin
        o_valid = 1'b1;
        unique case (ow)
          2'd0:    o_word = make_word(t_key[oi[TW-1:0]], 1'b0, 1'b0);
          2'd1:    o_word = make_word(t_w1[oi[TW-1:0]], 1'b0, 1'b0);
          default: o_word = make_word({d_sat, t_w2[oi[TW-1:0]][9:0]}, 1'b1, 1'b0);
        endcase
      end
      S_TIME: begin
        o_word  = make_word({1'b0, ptime}, 1'b1, 1'b0);
        o_valid = 1'b1;
      end
      S_EE: begin
        o_word  = make_ee(tag);
        o_valid = 1'b1;
      end
      default: ;
    endcase
  end

  assign q_pop  = (state == S_IN) && q_valid;
  assign l1_pop = q_pop && q_word.ee && (l1_n != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now   <= '0;
      l1_t  <= '0;
      l1_wp <= '0;
      l1_rp <= '0;
      l1_n  <= '0;
    end else begin
      now <= now + 20'd1;
      if (l1_accept && l1_n != 3'd4) begin
        l1_t[l1_wp] <= now;
        l1_wp       <= l1_wp + 2'd1;
      end
      if (l1_pop) l1_rp <= l1_rp + 2'd1;
      l1_n <= l1_n + 3'(l1_accept && l1_n != 3'd4) - 3'(l1_pop);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IN;
      t_valid  <= '0;
      t_key    <= '0;
      t_w1     <= '0;
      t_w2     <= '0;
      t_n      <= '0;
      nw       <= '0;
      k0       <= '0;
      k1       <= '0;
      oi       <= '0;
      ow       <= '0;
      tag      <= '0;
      ptime    <= '0;
      overflow <= 1'b0;
      ghost    <= 1'b0;
    end else begin
      ghost <= 1'b0;
      unique case (state)
        S_IN: if (q_pop) begin
          if (q_word.ee) begin
            tag   <= q_word.data[TAG_W-1:0];
            ptime <= (l1_n != '0) ? now - l1_t[l1_rp] : '0;
            nw    <= '0;
            oi    <= '0;
            ow    <= '0;
            state <= S_OUT;
          end else if (nw == 2'd0) begin
            k0 <= q_word.data;
            nw <= q_word.ep ? 2'd0 : 2'd1;
          end else if (nw == 2'd1) begin
            k1 <= q_word.data;
            nw <= q_word.ep ? 2'd0 : 2'd2;
          end else begin
            nw <= '0;
            if (hit) begin
              ghost <= 1'b1;
              if (q_word.data[9:0] < t_w2[hit_i][9:0]) begin
                t_w1[hit_i] <= k1;
                t_w2[hit_i] <= q_word.data;
              end
            end else if (t_n != (TW+1)'(MAXTRK)) begin
              t_valid[t_n[TW-1:0]] <= 1'b1;
              t_key[t_n[TW-1:0]]   <= k0;
              t_w1[t_n[TW-1:0]]    <= k1;
              t_w2[t_n[TW-1:0]]    <= q_word.data;
              t_n                  <= t_n + 1'b1;
            end else begin
              overflow <= 1'b1;
            end
          end
        end
        S_OUT: begin
          if (oi == (TW+1)'(MAXTRK) || !t_valid[oi[TW-1:0]]) state <= S_TIME;
          else if (!o_hold) begin
            if (ow == 2'd2) begin
              ow <= '0;
              oi <= oi + 1'b1;
            end else begin
              ow <= ow + 2'd1;
            end
          end
        end
        S_TIME: if (!o_hold) state <= S_EE;
        S_EE: if (!o_hold) begin
          state   <= S_IN;
          t_valid <= '0;
          t_n     <= '0;
        end
        default: state <= S_IN;
      endcase
    end
  end

  svt_cable_tx u_tx (
    .clk, .rst_n,
    .in_word(o_word), .in_valid(o_valid), .in_hold(o_hold),
    .out_word, .out_valid, .out_hold
  );

endmodule
