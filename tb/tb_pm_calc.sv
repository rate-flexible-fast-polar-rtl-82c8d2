// tb_pm_calc: random node LLRs and path metrics through every operation,
// checked against the path-metric rules written out with integers here
// (including saturation at 255 and the SPC parity term).
module tb_pm_calc;
  import rf_pkg::*;
  localparam int NPE = 16;
  int checks = 0, failures = 0;
  op_e op;
  logic [STW-1:0] t;
  pm_t pm_in, pm0, pm1;
  llr_t alpha [NPE];
  logic [MAGW-1:0] mag_sel, mag_min;
  logic parity;

  pm_calc #(.NPE(NPE)) dut (.*);

  function automatic int sat(input int x);
    return (x > 255) ? 255 : (x < 0) ? 0 : x;
  endfunction

  initial begin
    #10000000 $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    op_e ops [5] = '{OP_R0, OP_REP, OP_R1_EST, OP_SPC_SORT, OP_SPC_EST};
    for (int it = 0; it < 5000; it++) begin
      automatic int sneg = 0, spos = 0, e0, e1, T;
      op = ops[$urandom % 5];
      t = STW'($urandom % 5);
      T = 1 << t;
      pm_in = pm_t'(($urandom % 2) ? $urandom % 40 : $urandom % 256);
      for (int k = 0; k < NPE; k++) begin
        alpha[k] = llr_t'($urandom);
        if (k < T) begin
          if (alpha[k].s) sneg += alpha[k].m; else spos += alpha[k].m;
        end
      end
      mag_sel = MAGW'($urandom); mag_min = MAGW'($urandom); parity = 1'($urandom);
      #1;
      case (op)
        OP_R0:       begin e0 = sat(pm_in + sneg); e1 = e0; end
        OP_REP:      begin e0 = sat(pm_in + sneg); e1 = sat(pm_in + spos); end
        OP_R1_EST:   begin e0 = pm_in; e1 = sat(pm_in + mag_sel); end
        OP_SPC_SORT: begin e0 = parity ? sat(pm_in + mag_min) : pm_in; e1 = e0; end
        default:     begin
          e0 = pm_in;
          e1 = parity ? sat(sat(pm_in + mag_sel) - mag_min) : sat(pm_in + mag_sel + mag_min);
        end
      endcase
      checks += 2;
      if (pm0 != e0 || pm1 != e1) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s pm=%0d: got %0d/%0d want %0d/%0d", op.name(), pm_in, pm0, pm1, e0, e1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
