// am_chip: one associative-memory (AM) pattern-recognition chip.
//
// Holds NPATT patterns; a pattern is one superstrip number for each of
// NLAYERS detector layers (XFT plus four silicon layers).  Every hit
// (layer, superstrip) presented on hit_valid is compared in the same cycle
// with the superstrip of that layer in all patterns, and each pattern's hit
// mask bit for the layer is set on a match.  When the last hit of the event
// has been presented, end_event moves the set of patterns whose mask has all
// NLAYERS bits set into the readout register and clears the masks, so the
// next event can accumulate while this one is read out.  A priority encoder
// then gives the lowest matched pattern address on road_addr while
// road_valid is high; road_pop removes it.  Processing time is one cycle per
// hit plus one cycle per matched pattern.
//
// Patterns are loaded through the write port (pat_we) at start of run and
// stay until reset clears all valid bits.  128 patterns per chip, five
// layers, parallel mask accumulation and the priority encoder follow the
// paper; the load port and the double-buffered readout are this design's.
module am_chip
  import svt_pkg::*;
#(
  parameter int unsigned NPATT   = 128,
  parameter int unsigned NLAYERS = AM_LAYERS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // pattern load
  input  logic                              pat_we,
  input  logic [$clog2(NPATT)-1:0]          pat_addr,
  input  logic [NLAYERS-1:0][SS_W-1:0]      pat_data,
  // hits
  input  logic                              hit_valid,
  input  logic [2:0]                        hit_layer,
  input  logic [SS_W-1:0]                   hit_ss,
  input  logic                              end_event,
  // roads
  output logic                              road_valid,
  output logic [$clog2(NPATT)-1:0]          road_addr,
  input  logic                              road_pop
);
  localparam int unsigned AW = $clog2(NPATT);

  logic [NLAYERS-1:0][SS_W-1:0] pattern [NPATT];
  logic [NPATT-1:0]             pvalid;
  logic [NPATT-1:0][NLAYERS-1:0] mask;
  logic [NPATT-1:0]             matched;
  logic [NPATT-1:0]             full;

  always_ff @(posedge clk) begin
    if (pat_we) pattern[pat_addr] <= pat_data;
  end

  always_comb begin
    for (int p = 0; p < NPATT; p++) full[p] = pvalid[p] && (&mask[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pvalid  <= '0;
      mask    <= '0;
      matched <= '0;
    end else begin
      if (pat_we) pvalid[pat_addr] <= 1'b1;
      if (road_pop && road_valid) matched[road_addr] <= 1'b0;
      if (end_event) begin
        matched <= full;
        mask    <= '0;
      end else if (hit_valid) begin
        for (int p = 0; p < NPATT; p++)
          for (int l = 0; l < NLAYERS; l++)
            if (hit_layer == 3'(l) && pattern[p][l] == hit_ss) mask[p][l] <= 1'b1;
      end
    end
  end

  // priority encoder: lowest matched address first
  always_comb begin
    road_valid = |matched;
    road_addr  = '0;
    for (int p = NPATT-1; p >= 0; p--) if (matched[p]) road_addr = AW'(p);
  end

endmodule
