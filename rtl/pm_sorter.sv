// pm_sorter: keeps the L best of the 2L candidate paths.
//
// Candidate c = 2*l + b is path l extended with hypothesis b; cand_valid
// marks the candidates that exist (active paths only). Every candidate is
// ranked by the number of valid candidates with a smaller PM, ties going to
// the lower candidate index; the candidate of rank r becomes surviving path
// r. Surviving path r therefore copies its state from path sel_cand[r] / 2
// and takes hypothesis sel_cand[r] % 2. Output r is valid when at least r+1
// candidates exist, and surviving path 0 always has the smallest PM.
// The paper uses a sorter of 2L path metrics without giving its structure;
// this all-pairs comparison network is this design's choice. Combinational.
module pm_sorter
  import rf_pkg::*;
#(
  parameter int unsigned L  = 4,
  localparam int unsigned CW = $clog2(2 * L)
) (
  input  pm_t            cand_pm    [2*L],
  input  logic [2*L-1:0] cand_valid,
  output logic [CW-1:0]  sel_cand   [L],
  output pm_t            sel_pm     [L],
  output logic [L-1:0]   sel_valid
);

  logic [CW:0] rank [2*L];

  always_comb begin
    for (int c = 0; c < 2 * L; c++) begin
      rank[c] = '0;
      for (int d = 0; d < 2 * L; d++)
        if (cand_valid[d] && d != c &&
            ((cand_pm[d] < cand_pm[c]) || (cand_pm[d] == cand_pm[c] && d < c)))
          rank[c] = rank[c] + 1'b1;
    end
    for (int r = 0; r < L; r++) begin
      sel_cand[r]  = '0;
      sel_pm[r]    = '0;
      sel_valid[r] = 1'b0;
      for (int c = 0; c < 2 * L; c++)
        if (cand_valid[c] && 32'(rank[c]) == r) begin
          sel_cand[r]  = CW'(c);
          sel_pm[r]    = cand_pm[c];
          sel_valid[r] = 1'b1;
        end
    end
  end

endmodule
