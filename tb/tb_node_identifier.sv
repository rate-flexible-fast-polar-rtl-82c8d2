// tb_node_identifier: checks the on-line node identification against the
// full frozen pattern of every node of a length-256 polar code, for many K.
// The reliability order comes from the Bhattacharyya parameters of the
// binary erasure channel (Z = 0.5): Z(W^0) = 2z - z^2, Z(W^1) = z^2, the
// measure Theorem 2 is proven for. Both the 4-comparator identifier
// (EXT = 0) and the extended 10-comparator one (EXT = 1) are checked: each
// flag must be set exactly when the whole node has the pattern of its class.
module tb_node_identifier;
  import rf_pkg::*;
  localparam int N = 256, NL = 8;
  int checks = 0, failures = 0;
  int v [N];
  bit s [N];

  logic [NL-1:0]  k_info;
  logic [STW-1:0] t;
  logic [NL-1:0]  v4 [4];
  logic [NL-1:0]  v10 [10];
  logic r0a, r1a, repa, spca, r0b, r1b, repb, spcb;
  logic [4:0] tna, tnb;

  node_identifier #(.VW(NL), .EXT(1'b0)) dut4 (
    .k_info(k_info), .t(t), .v(v4), .rate0(r0a), .rate1(r1a), .rep(repa), .spc(spca), .type_n(tna));
  node_identifier #(.VW(NL), .EXT(1'b1)) dut10 (
    .k_info(k_info), .t(t), .v(v10), .rate0(r0b), .rate1(r1b), .rep(repb), .spc(spcb), .type_n(tnb));

  // pattern test: 1 = info, 0 = frozen; spec string per class
  function automatic bit match(input int i, input int T, input int cls);
    for (int j = 0; j < T; j++) begin
      bit want;
      case (cls)
        0: want = 0;                                   // Rate-0
        1: want = 1;                                   // Rate-1
        2: want = (j == T-1);                          // Rep
        3: want = (j != 0);                            // SPC
        4: want = (j >= T-2);                          // Type-I
        5: want = (j >= T-3);                          // Type-II
        6: want = (j >= 2);                            // Type-III
        7: want = (j >= 3);                            // Type-IV
        8: want = (j >= T-3) || (j == T-5);            // Type-V
        default: want = 0;
      endcase
      if (s[i+j] != want) return 0;
    end
    return 1;
  endfunction

  function automatic int cl(input int x, input int T);
    return (x < 0 || x >= T) ? -1 : x;
  endfunction

  task automatic chk(input string name, input logic got, input bit want);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 20) $display("FAIL %s t=%0d K=%0d: got %0b want %0b", name, t, k_info, got, want);
    end
  endtask

  initial begin
    #100000000 $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real z [N];
    for (int i = 0; i < N; i++) begin
      z[i] = 0.5;
      for (int j = NL - 1; j >= 0; j--) z[i] = ((i >> j) & 1) ? z[i] * z[i] : 2.0 * z[i] - z[i] * z[i];
    end
    for (int i = 0; i < N; i++) begin
      v[i] = 0;
      for (int j = 0; j < N; j++) if (z[j] < z[i] || (z[j] == z[i] && j > i)) v[i]++;
    end
    for (int k = 1; k < N; k += 3) begin
      for (int i = 0; i < N; i++) s[i] = v[i] < k;
      for (int tt = 0; tt <= NL; tt++) begin
        automatic int T = 1 << tt;
        for (int i = 0; i < N; i += T) begin
          automatic int idx10 [10];
          idx10 = '{0, 1, T-2, T-1, 2, 4, T-9, T-5, T-4, T-3};
          k_info = NL'(k); t = STW'(tt);
          for (int q = 0; q < 4; q++) v4[q] = NL'(v[i + ((idx10[q] < 0) ? 0 : idx10[q])]);
          for (int q = 0; q < 10; q++) begin
            automatic int x = cl(idx10[q], T);
            v10[q] = (x < 0) ? NL'(N - 1) : NL'(v[i + x]);  // outside: never read as info
          end
          #1;
          chk("Rate-0",  r0a,  match(i, T, 0));
          chk("Rate-1",  r1a,  match(i, T, 1));
          chk("Rep",     repa, (T >= 2) && match(i, T, 2));
          chk("SPC",     spca, (T >= 2) && match(i, T, 3));
          chk("Rate-0x", r0b,  match(i, T, 0));
          chk("Rate-1x", r1b,  match(i, T, 1));
          chk("Repx",    repb, (T >= 2) && match(i, T, 2));
          chk("SPCx",    spcb, (T >= 2) && match(i, T, 3));
          chk("Type-I",   tnb[0], (T >= 4) && match(i, T, 4));
          chk("Type-II",  tnb[1], (T >= 8) && match(i, T, 5));
          chk("Type-III", tnb[2], (T >= 4) && match(i, T, 6));
          chk("Type-IV",  tnb[3], (T >= 8) && match(i, T, 7));
          chk("Type-V",   tnb[4], (T >= 8) && match(i, T, 8));
          chk("no ext",   |tna, 1'b0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
