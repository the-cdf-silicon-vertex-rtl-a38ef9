// spy_buffer: circular memory on one end of an SVT cable.
//
// Acts as a logic state analyzer and as a test-data source.  The cable runs
// through the buffer.  In normal mode the words pass unchanged (no added
// latency) and every transferred word is written into a circular memory, so
// the memory always holds the last DEPTH words seen on the cable.  Raising
// freeze (the board's or the backplane's freeze line) stops recording; the
// host can then read the memory through host_addr/host_rdata (one cycle read
// latency) while data keep flowing.  wptr and wrapped tell the host where
// the newest word is.
//
// In source mode the host first writes a test pattern with host_we, then sets
// source_mode and pulses source_start: the buffer then sends words 0 ..
// source_len-1 on its output, obeying hold, and holds off the upstream
// board.  source_busy is high while playing.  Recording of what is sent in
// source mode continues unless frozen, which also makes the buffer a sink.
//
// DEPTH defaults to the paper's 10^5 words.  The host port and the source
// mode control bits are this design's own.
module spy_buffer
  import svt_pkg::*;
#(
  parameter int unsigned DEPTH = 100000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // cable in
  input  svt_word_t                in_word,
  input  logic                     in_valid,
  output logic                     in_hold,
  // cable out
  output svt_word_t                out_word,
  output logic                     out_valid,
  input  logic                     out_hold,
  // control
  input  logic                     freeze,
  input  logic                     source_mode,
  input  logic                     source_start,
  input  logic [$clog2(DEPTH)-1:0] source_len,
  output logic                     source_busy,
  // host port
  input  logic                     host_we,
  input  logic [$clog2(DEPTH)-1:0] host_addr,
  input  svt_word_t                host_wdata,
  output svt_word_t                host_rdata,
  output logic [$clog2(DEPTH)-1:0] wptr,
  output logic                     wrapped,
  output logic                     frozen
);
  localparam int unsigned AW = $clog2(DEPTH);

  svt_word_t     mem [DEPTH];
  logic [AW-1:0] rptr;
  svt_word_t     src_word;
  logic          src_valid;
  logic          xfer, rec;
  logic          src_fetch;
  logic [AW-1:0] raddr;
  logic          fetched;
  svt_word_t     rdata;

  // output mux
  assign out_word  = source_mode ? src_word  : in_word;
  assign out_valid = source_mode ? src_valid : in_valid;
  assign in_hold   = source_mode ? 1'b1      : out_hold;
  assign xfer      = out_valid && !out_hold;
  assign rec       = xfer && !freeze && !(source_mode && host_we);
  assign frozen    = freeze;

  // playback: at most one read in flight, so one word every two cycles
  assign src_fetch = source_busy && (rptr != source_len) && !fetched && (!src_valid || !out_hold);
  assign raddr     = source_busy ? rptr : host_addr;

  always_ff @(posedge clk) begin
    if (host_we && (freeze || source_mode)) mem[host_addr] <= host_wdata;
    else if (rec) mem[wptr] <= out_word;
    rdata <= mem[raddr];
  end
  assign host_rdata = rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr        <= '0;
      wrapped     <= 1'b0;
      rptr        <= '0;
      src_valid   <= 1'b0;
      src_word    <= '0;
      source_busy <= 1'b0;
    end else begin
      if (rec) begin
        if (wptr == AW'(DEPTH-1)) begin
          wptr    <= '0;
          wrapped <= 1'b1;
        end else begin
          wptr <= wptr + 1'b1;
        end
      end
      if (source_start && source_mode && !source_busy) begin
        source_busy <= 1'b1;
        rptr        <= '0;
        src_valid   <= 1'b0;
      end else if (source_busy) begin
        // word fetched last cycle appears in rdata now
        if (src_valid && !out_hold) src_valid <= 1'b0;
        if (src_fetch) rptr <= rptr + 1'b1;
        if (fetched) begin
          src_word  <= rdata;
          src_valid <= 1'b1;
        end
        if (rptr == source_len && !fetched && (!src_valid || !out_hold)) source_busy <= 1'b0;
      end
    end
  end

  // one-cycle delayed fetch flag matches the synchronous read
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fetched <= 1'b0;
    else        fetched <= src_fetch;
  end

endmodule
