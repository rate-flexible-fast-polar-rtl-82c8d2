// tb_pm_sorter: random candidate path metrics and valid masks (often with
// ties); the survivors must be the valid candidates in increasing order of
// (PM, index), as many as exist up to L.
module tb_pm_sorter;
  import rf_pkg::*;
  localparam int L = 4;
  int checks = 0, failures = 0;
  pm_t cand_pm [2*L], sel_pm [L];
  logic [2*L-1:0] cand_valid;
  logic [2:0] sel_cand [L];
  logic [L-1:0] sel_valid;

  pm_sorter #(.L(L)) dut (.*);

  initial begin
    #10000000 $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      automatic int order [$];
      for (int c = 0; c < 2 * L; c++) cand_pm[c] = pm_t'($urandom % 12);
      cand_valid = 8'($urandom);
      #1;
      // selection sort reference
      for (int c = 0; c < 2 * L; c++) if (cand_valid[c]) order.push_back(c);
      for (int a = 0; a < order.size(); a++)
        for (int b = a + 1; b < order.size(); b++)
          if (cand_pm[order[b]] < cand_pm[order[a]] ||
              (cand_pm[order[b]] == cand_pm[order[a]] && order[b] < order[a])) begin
            automatic int tmp = order[a]; order[a] = order[b]; order[b] = tmp;
          end
      for (int r = 0; r < L; r++) begin
        checks++;
        if (r < order.size()) begin
          if (!sel_valid[r] || int'(sel_cand[r]) != order[r] || sel_pm[r] != cand_pm[order[r]]) failures++;
        end else if (sel_valid[r]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
