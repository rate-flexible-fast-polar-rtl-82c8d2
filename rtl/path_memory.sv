// path_memory: hard-bit estimate (partial-sum) memory of a group of paths.
//
// Each of the N_INST instances holds W bits, indexed by bit position inside
// the part of the decoding tree the group covers. A node of T = 2^t bits that
// starts at position p writes its codeword estimate beta to bits [p, p+T).
// When the right child of a node finishes, the parent's beta is formed in
// place by the combine operation (paper eq. (10)):
//   beta_parent[j]     = beta_left[j] xor beta_right[j]   j < T
//   beta_parent[T + j] = beta_right[j]
// which, with the left child stored at [p, p+T) and the right at [p+T, p+2T),
// is "bit p+j ^= bit p+T+j" for j < T. The stored bits of the pending left
// siblings of all stages never overlap, so one W-bit vector per path serves
// all stages.
//
// Operations, applied on the clock edge in this order:
//  * copy  : instance j takes instance cp_src[j] (when cp_en);
//  * combine: all instances, left child of 2^cb_t bits at cb_pos (when cb_en);
//  * write : instances with wr_en set take wr_data[0 +: 2^wr_t] at wr_pos,
//            on top of a copy made in the same cycle.
// The full vectors are visible on rd (combinational).
module path_memory
  import rf_pkg::*;
#(
  parameter int unsigned N_INST = 4,
  parameter int unsigned W      = 256,
  parameter int unsigned WIN    = 64,
  localparam int unsigned PW    = $clog2(W) + 1,
  localparam int unsigned IW    = (N_INST > 1) ? $clog2(N_INST) : 1
) (
  input  logic                  clk,
  input  logic [N_INST-1:0]     wr_en,
  input  logic [PW-1:0]         wr_pos,
  input  logic [STW-1:0]        wr_t,
  input  logic [WIN-1:0]        wr_data [N_INST],
  input  logic                  cb_en,
  input  logic [PW-1:0]         cb_pos,
  input  logic [STW-1:0]        cb_t,
  input  logic                  cp_en,
  input  logic [IW-1:0]         cp_src [N_INST],
  output logic [W-1:0]          rd [N_INST]
);

  logic [W-1:0] mem [N_INST];

  assign rd = mem;

  logic [W-1:0] nxt [N_INST];

  always_comb
    for (int j = 0; j < N_INST; j++) begin
      nxt[j] = cp_en ? mem[cp_src[j]] : mem[j];
      if (cb_en)
        for (int b = 0; b < W; b++)
          if (b >= 32'(cb_pos) && b < 32'(cb_pos) + (32'd1 << cb_t) && b + (32'd1 << cb_t) < W)
            nxt[j][b] = mem[j][b] ^ mem[j][b + (32'd1 << cb_t)];
      if (wr_en[j])
        for (int b = 0; b < WIN; b++)
          if (b < (32'd1 << wr_t) && 32'(wr_pos) + b < W)
            nxt[j][32'(wr_pos) + b] = wr_data[j][b];
    end

  always_ff @(posedge clk) mem <= nxt;

endmodule
