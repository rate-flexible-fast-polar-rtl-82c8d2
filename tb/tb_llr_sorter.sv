// tb_llr_sorter: repeated minimum search over random node LLRs, with the
// found positions masked one after the other; the positions must come out
// in increasing magnitude order (lowest position first on ties), as a
// reference stable sort of the magnitudes gives.
module tb_llr_sorter;
  import rf_pkg::*;
  localparam int NPE = 16;
  int checks = 0, failures = 0;
  llr_t alpha [NPE];
  logic [STW-1:0] t;
  logic [NPE-1:0] taken;
  logic [3:0] min_pos;
  logic [MAGW-1:0] min_mag;
  logic found;

  llr_sorter #(.NPE(NPE)) dut (.*);

  initial begin
    #10000000 $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      automatic int T;
      automatic int ord [$];
      t = STW'($urandom % 5);
      T = 1 << t;
      for (int k = 0; k < NPE; k++) alpha[k] = llr_t'($urandom % 24);
      for (int k = 0; k < T; k++) ord.push_back(k);
      for (int a = 0; a < T; a++)
        for (int b = a + 1; b < T; b++)
          if (alpha[ord[b]].m < alpha[ord[a]].m ||
              (alpha[ord[b]].m == alpha[ord[a]].m && ord[b] < ord[a])) begin
            automatic int tmp = ord[a]; ord[a] = ord[b]; ord[b] = tmp;
          end
      taken = '0;
      for (int s = 0; s <= T; s++) begin
        #1;
        checks++;
        if (s == T) begin
          if (found) failures++;
        end else begin
          if (!found || int'(min_pos) != ord[s] || min_mag != alpha[ord[s]].m) begin
            failures++;
            if (failures < 10) $display("FAIL step %0d: pos %0d want %0d", s, min_pos, ord[s]);
          end
          taken[min_pos] = 1'b1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
