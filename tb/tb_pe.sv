// tb_pe: exhaustive check of the processing element against integer
// reference models of F (min-sum) and G (b + (1-2c)a, saturated to +-31).
module tb_pe;
  import rf_pkg::*;
  int checks = 0, failures = 0;
  llr_t a, b, y;
  logic c, fsel;

  pe dut (.a(a), .b(b), .c(c), .fsel(fsel), .y(y));

  function automatic int val(input llr_t x);
    return x.s ? -int'(x.m) : int'(x.m);
  endfunction

  initial begin
    #1000000 $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int ia = 0; ia < 64; ia++)
      for (int ib = 0; ib < 64; ib++)
        for (int ic = 0; ic < 4; ic++) begin
          automatic int ref_v, got, av, bv;
          a = llr_t'(ia); b = llr_t'(ib); c = ic[0]; fsel = ic[1];
          #1;
          av = val(a); bv = val(b);
          if (!fsel) begin
            automatic int m = (a.m < b.m) ? a.m : b.m;
            ref_v = ((av < 0) != (bv < 0)) ? -m : m;
          end else begin
            ref_v = c ? bv - av : bv + av;
            if (ref_v > 31) ref_v = 31;
            if (ref_v < -31) ref_v = -31;
          end
          got = val(y);
          checks++;
          if (got != ref_v || (y.m == 0 && y.s)) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d c=%0d g=%0d: got %0d want %0d", av, bv, c, fsel, got, ref_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
