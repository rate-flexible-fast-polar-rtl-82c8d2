// tb_pe_array: random vectors through a set of 8 PEs, each lane checked
// against integer models of F and G.
module tb_pe_array;
  import rf_pkg::*;
  localparam int NPE = 8;
  int checks = 0, failures = 0;
  llr_t a [NPE], b [NPE], y [NPE];
  logic [NPE-1:0] c;
  logic fsel;

  pe_array #(.NPE(NPE)) dut (.a(a), .b(b), .c(c), .fsel(fsel), .y(y));

  function automatic int val(input llr_t x);
    return x.s ? -int'(x.m) : int'(x.m);
  endfunction

  initial begin
    #1000000 $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int k = 0; k < NPE; k++) begin a[k] = llr_t'($urandom); b[k] = llr_t'($urandom); end
      c = NPE'($urandom); fsel = 1'($urandom);
      #1;
      for (int k = 0; k < NPE; k++) begin
        automatic int r, av = val(a[k]), bv = val(b[k]);
        if (!fsel) begin
          automatic int m = (a[k].m < b[k].m) ? a[k].m : b[k].m;
          r = ((av < 0) != (bv < 0)) ? -m : m;
        end else begin
          r = c[k] ? bv - av : bv + av;
          r = (r > 31) ? 31 : (r < -31) ? -31 : r;
        end
        checks++;
        if (val(y[k]) != r) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d: got %0d want %0d", k, val(y[k]), r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
