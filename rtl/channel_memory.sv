// channel_memory: the N channel LLRs of the frame being decoded.
//
// Channel LLRs are QCH = 4-bit sign-magnitude values (paper: 4 bits); they
// share the 2 fractional bits of the internal 6-bit format, so reading
// zero-extends the magnitude into an internal llr_t (this scaling is this
// design's choice). Loaded one value per cycle through the write port.
// The stage-(n-1) F/G operations read two chunks of NPE values per cycle,
// alpha[off_a + k] and alpha[off_b + k]; the reads are combinational.
module channel_memory
  import rf_pkg::*;
#(
  parameter int unsigned N   = 1024,
  parameter int unsigned NPE = 64
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  logic [QCH-1:0]       wdata,   // {sign, magnitude}
  input  logic [$clog2(N)-1:0] off_a,
  input  logic [$clog2(N)-1:0] off_b,
  output llr_t                 rd_a [NPE],
  output llr_t                 rd_b [NPE]
);

  logic [QCH-1:0] mem [N];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  function automatic llr_t ext(input logic [QCH-1:0] x);
    llr_t r;
    r.s = x[QCH-1] && (x[QCH-2:0] != '0);
    r.m = MAGW'(x[QCH-2:0]);
    return r;
  endfunction

  always_comb
    for (int k = 0; k < NPE; k++) begin
      rd_a[k] = ext(mem[(32'(off_a) + k) % N]);
      rd_b[k] = ext(mem[(32'(off_b) + k) % N]);
    end

endmodule
