// llr_sorter: finds the least reliable LLR of a Rate-1 or SPC node.
//
// Among the first 2^t LLR magnitudes whose bit in 'taken' is clear, it
// returns the position of the smallest magnitude (lowest position on ties)
// and that magnitude. Used once per cycle during the sort phase of a
// Rate-1 or SPC node, with 'taken' accumulating the positions already found,
// it delivers the node's least reliable positions in increasing order of
// reliability, which is what the estimation phase needs. The paper only
// states that an LLR sorter is used; this iterative minimum search is this
// design's choice. Combinational (a linear scan that synthesis turns into a
// comparator chain).
module llr_sorter
  import rf_pkg::*;
#(
  parameter int unsigned NPE = 64,
  localparam int unsigned PW = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  llr_t            alpha [NPE],
  input  logic [STW-1:0]  t,
  input  logic [NPE-1:0]  taken,
  output logic [PW-1:0]   min_pos,
  output logic [MAGW-1:0] min_mag,
  output logic            found
);

  always_comb begin
    min_pos = '0;
    min_mag = '1;
    found   = 1'b0;
    for (int k = 0; k < NPE; k++)
      if (k < (32'd1 << t) && !taken[k] && (!found || alpha[k].m < min_mag)) begin
        min_pos = PW'(k);
        min_mag = alpha[k].m;
        found   = 1'b1;
      end
  end

endmodule
