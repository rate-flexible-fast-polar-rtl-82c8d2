// llr_memory: internal LLR memory of a group of list paths.
//
// Each of the N_INST instances (one per path) stores the LLR vectors alpha_t
// of stages S_LO..S_HI, stage t holding the 2^t LLRs of the node currently
// visited at that stage; entries are rewritten each time a node of the same
// stage is visited. Stage t lives at base address 2^t - 2^S_LO of a flat
// array, so an instance holds 2^(S_HI+1) - 2^S_LO LLRs. The paper splits the
// same contents into a high-stage memory (words of N_PE LLRs, for nodes larger
// than N_PE) and a low-stage memory (single LLRs); one flat array per path
// with chunked access is this design's simplification of that split.
//
// Access, per cycle:
//  * read: two windows of NPE LLRs of stage rd_stage, starting at rd_off_a and
//    rd_off_b, for every instance (combinational). F/G at stage t reads
//    alpha_{t+1}[c*NPE + k] and alpha_{t+1}[2^t + c*NPE + k].
//  * write: wr_cnt LLRs (at most NPE) of stage wr_stage from wr_off, in every
//    instance whose wr_en bit is set.
//  * copy: when cp_en is set, instance j takes the whole contents of instance
//    cp_src[j] (the paper's path copy, which overwrites all stages of a path
//    that lost all its children). Copy takes precedence over write.
module llr_memory
  import rf_pkg::*;
#(
  parameter int unsigned N_INST = 4,
  parameter int unsigned S_LO   = 0,
  parameter int unsigned S_HI   = 8,
  parameter int unsigned NPE    = 64,
  localparam int unsigned DEPTH = (1 << (S_HI + 1)) - (1 << S_LO),
  localparam int unsigned AW    = $clog2(DEPTH) + 1,
  localparam int unsigned IW    = (N_INST > 1) ? $clog2(N_INST) : 1
) (
  input  logic                  clk,
  input  logic [STW-1:0]        rd_stage,
  input  logic [AW-1:0]         rd_off_a,
  input  logic [AW-1:0]         rd_off_b,
  output llr_t                  rd_a [N_INST][NPE],
  output llr_t                  rd_b [N_INST][NPE],
  input  logic [N_INST-1:0]     wr_en,
  input  logic [STW-1:0]        wr_stage,
  input  logic [AW-1:0]         wr_off,
  input  logic [$clog2(NPE):0]  wr_cnt,
  input  llr_t                  wr_data [N_INST][NPE],
  input  logic                  cp_en,
  input  logic [IW-1:0]         cp_src [N_INST]
);

  llr_t mem [N_INST][DEPTH];

  function automatic int unsigned base(input logic [STW-1:0] t);
    return (32'd1 << t) - (32'd1 << S_LO);
  endfunction

  always_comb
    for (int j = 0; j < N_INST; j++)
      for (int k = 0; k < NPE; k++) begin
        rd_a[j][k] = mem[j][(base(rd_stage) + 32'(rd_off_a) + k) % DEPTH];
        rd_b[j][k] = mem[j][(base(rd_stage) + 32'(rd_off_b) + k) % DEPTH];
      end

  always_ff @(posedge clk) begin
    if (cp_en) begin
      for (int j = 0; j < N_INST; j++) mem[j] <= mem[cp_src[j]];
    end else begin
      for (int j = 0; j < N_INST; j++)
        if (wr_en[j])
          for (int k = 0; k < NPE; k++)
            if (k < 32'(wr_cnt))
              mem[j][(base(wr_stage) + 32'(wr_off) + k) % DEPTH] <= wr_data[j][k];
    end
  end

endmodule
