// reliability_memory: storage for the relative reliability vector v.
//
// Entry i holds v_i, the reliability rank of bit-channel i (0 = most
// reliable), on VW = log2(N) bits: N x VW = 10240 bits for N = 1024, the
// paper's external memory. It is loaded once through the write port; it does
// not depend on the code rate, so every K in 1..N is served by the same
// contents. The decoder reads NR entries per cycle (four for the node
// identifier of the paper's decoder). Reads are synchronous: the data of an
// address presented in cycle c is valid in cycle c+1.
//
// The paper builds this memory with a dual-port SRAM macro; here it is a
// plain array with NR read ports, which is this design's choice.
module reliability_memory #(
  parameter int unsigned N  = 1024,
  parameter int unsigned VW = $clog2(N),
  parameter int unsigned NR = 4
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] waddr,
  input  logic [VW-1:0]        wdata,
  input  logic [$clog2(N)-1:0] raddr [NR],
  output logic [VW-1:0]        rdata [NR]
);

  logic [VW-1:0] mem [N];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int r = 0; r < NR; r++) rdata[r] <= mem[raddr[r]];
  end

endmodule
