// ss_compute: combinational superstrip lookup for one hit word.
//
// Maps a silicon hit or an XFT track word to the AM layer it belongs to and
// the superstrip (bin) it falls in.  Silicon: the hit's layer is mapped
// through cfg.sil_am_layer (hits of the unused fifth layer give
// valid = 0), and bin = centroid * recip >> 16 with the layer's programmable
// width; the superstrip number is {barrel, bin}.  XFT track: the track is
// first swum to the outer silicon radius with a linear correction in
// curvature, phi_R = phi + (c * swim_k) >>> 4, clipped to the slice, then
// binned the same way in AM layer 0.  Shared by the AM board and the hit
// buffer so both see identical superstrips.  The programmable bin widths and
// the XFT swim follow the paper; the linear swim and the reciprocal
// multiplier are this design's choice.
module ss_compute
  import svt_pkg::*;
(
  input  bin_cfg_t           cfg,
  input  logic [DATA_W-1:0]  hit,
  output logic               valid,
  output logic [2:0]         am_layer,
  output logic [SS_W-1:0]    ss,
  output logic [COORD_W-1:0] coord     // coordinate the bin was taken from
);
  logic [2:0]                lay;
  logic signed [XC_W-1:0]    c;
  logic signed [XPHI_W+2:0]  phi_r;
  logic [31:0]               prod;

  assign lay = hit[20:18];
  assign c   = hit[16:11];

  always_comb begin
    valid    = 1'b0;
    am_layer = '0;
    coord    = '0;
    phi_r    = '0;
    if (lay == XFT_LAYER) begin
      phi_r = $signed({3'b000, hit[XPHI_W-1:0]}) + (((XPHI_W+3)'(c) * (XPHI_W+3)'(cfg.swim_k)) >>> 4);
      if (phi_r < 0)                                    coord = '0;
      else if (phi_r > $signed((XPHI_W+3)'(2**XPHI_W - 1))) coord = COORD_W'(2**XPHI_W - 1);
      else                                              coord = COORD_W'(phi_r);
      valid    = 1'b1;
      am_layer = 3'd0;
    end else if (lay < 3'(NSIL_LAYERS)) begin
      coord    = hit[COORD_W-1:0];
      valid    = cfg.sil_use[lay];
      am_layer = cfg.sil_am_layer[lay];
    end
    if (am_layer >= 3'(AM_LAYERS)) begin
      valid    = 1'b0;
      am_layer = '0;
    end
    prod = 32'(coord) * 32'(cfg.recip[am_layer]);
    ss   = (lay == XFT_LAYER) ? {3'b000, prod[25:16]} : {hit[17:15], prod[25:16]};
  end

endmodule
