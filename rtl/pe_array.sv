// pe_array: one set of N_PE processing elements serving one candidate path.
//
// The decoder instantiates L_max such sets side by side (one per list path),
// as the paper's architecture does. In one cycle a set computes N_PE outputs
// of an F_t or G_t operation: out[k] = F(a[k], b[k]) or G(a[k], b[k], c[k]),
// where a[k] and b[k] are the LLRs alpha_i and alpha_{i+T} of the parent node.
// Outputs beyond the valid count (nodes smaller than N_PE) are computed but
// ignored by the memory that receives them. Combinational.
module pe_array
  import rf_pkg::*;
#(
  parameter int unsigned NPE = 64
) (
  input  llr_t           a [NPE],
  input  llr_t           b [NPE],
  input  logic [NPE-1:0] c,
  input  logic           fsel,
  output llr_t           y [NPE]
);

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    pe u_pe (.a(a[k]), .b(b[k]), .c(c[k]), .fsel(fsel), .y(y[k]));
  end

endmodule
