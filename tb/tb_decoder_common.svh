// Shared body of the end-to-end decoder testbenches.
//
// Expects, in the including module: localparams N, NPE, L_MAX, P, L_UP,
// MAX_R0, MAX_REP, MAX_R1, MAX_SPC, NL, FRAMES, NERR and K_LIST[5]; the
// decoder's port signals; and the macros CU and DP naming the control unit
// and datapath instances (defaults dut.u_cu and dut.u_dp). For every K in K_LIST it decodes
// FRAMES frames: frame 0 is noiseless, later frames carry NERR weak errors
// (sign flipped, magnitude 1) among strong correct LLRs (magnitude 4..7), a
// channel any maximum-likelihood decoder corrects. Checks:
//  * the decoded codeword equals the transmitted one (and PM = 0 when
//    noiseless);
//  * every special node the control unit decodes, and every node it
//    descends, is classified as a brute-force look at the frozen pattern of
//    the whole node says (Rate-0, Rate-1, Rep, SPC and the size limits);
//  * the decoding time equals the cycle count of the schedule, worked out
//    here from the node classes (plus a fixed start/finish overhead);
//  * each mechanism happened at least once over the run.
// The reliability vector is the polarization-weight order
// w(i) = sum_j b_j(i) 2^(j/4) (larger w = more reliable, ties to the larger
// index), which respects the partial order the node identification relies on.

`ifndef CU
`define CU dut.u_cu
`endif
`ifndef DP
`define DP dut.u_dp
`endif

  localparam int unsigned NSUB = N / P;
  localparam int unsigned TB   = NL - $clog2(P);

  int checks = 0, failures = 0;
  int v [N];
  bit s [N];
  bit u [N];
  bit x [N];
  int cur_k;

  // mechanism counters
  int n_r0 = 0, n_rep = 0, n_r1 = 0, n_spc = 0, n_f = 0, n_g = 0;
  int n_bnd = 0, n_prune = 0, n_copy = 0, n_ucomb = 0, n_comb = 0, n_upper_fg = 0;
  int n_split_keep_flip = 0, n_spc_parity_fix = 0;

  function automatic int unsigned clipsz(input int unsigned m);
    int unsigned r = m;
    if (r > NPE)  r = NPE;
    if (r > NSUB) r = NSUB;
    return r;
  endfunction

  // brute-force node class from the frozen pattern: 0 none, 1 R0, 2 R1, 3 Rep, 4 SPC
  function automatic int node_class(input int t, input int i);
    int T = 1 << t;
    bit all0 = 1, all1 = 1, rep = 1, spc = 1;
    for (int j = 0; j < T; j++) begin
      if (s[i+j]) all0 = 0; else all1 = 0;
      if (s[i+j] != (j == T-1)) rep = 0;
      if (s[i+j] != (j != 0))   spc = 0;
    end
    if (t == 0) return all1 ? 2 : 1;
    if (all0 && T <= clipsz(MAX_R0))  return 1;
    if (all1 && T <= clipsz(MAX_R1))  return 2;
    if (rep  && T <= clipsz(MAX_REP)) return 3;
    if (spc  && T <= clipsz(MAX_SPC)) return 4;
    return 0;
  endfunction

  // cycle count of the schedule for the subtree (t, i)
  function automatic int sched(input int t, input int i);
    int T = 1 << t;
    int c, fin, s1, s2, ch;
    fin = (t == TB) ? 2 : 1;
    c = 2;  // reliability fetch + decision
    case (node_class(t, i))
      1, 3: c += 1;
      2: begin s1 = (L_MAX - 1 < T) ? L_MAX - 1 : T; c += 2 * s1 + 1; end
      4: begin s2 = (L_MAX < T) ? L_MAX : T; c += s2 + (s2 - 1) + 2; end
      default: begin
        ch = ((T / 2) + NPE - 1) / NPE;
        c += ch + sched(t - 1, i) + ch + sched(t - 1, i + T / 2);
      end
    endcase
    return c + fin;
  endfunction

  task automatic build_v();
    real w [N];
    for (int i = 0; i < N; i++) begin
      w[i] = 0.0;
      for (int j = 0; j < NL; j++) if ((i >> j) & 1) w[i] += $pow(2.0, j / 4.0);
    end
    for (int i = 0; i < N; i++) begin
      v[i] = 0;
      for (int j = 0; j < N; j++)
        if (w[j] > w[i] || (w[j] == w[i] && j > i)) v[i]++;
    end
  endtask

  task automatic load_v();
    for (int i = 0; i < N; i++) begin
      v_we <= 1'b1; v_waddr <= NL'(i); v_wdata <= NL'(v[i]);
      @(posedge clk);
    end
    v_we <= 1'b0;
  endtask

  task automatic make_frame(input int k, input int nerr);
    int perm [N];
    bit flip [N];
    for (int i = 0; i < N; i++) begin
      s[i] = (v[i] < k);
      u[i] = s[i] ? 1'($urandom) : 1'b0;
      x[i] = u[i];
      flip[i] = 0;
    end
    for (int len = 1; len < N; len *= 2)
      for (int b = 0; b < N; b += 2 * len)
        for (int j = 0; j < len; j++) x[b+j] ^= x[b+j+len];
    for (int e = 0; e < nerr; e++) flip[$urandom % N] = 1;
    for (int i = 0; i < N; i++) begin
      ch_we <= 1'b1; ch_waddr <= NL'(i);
      if (flip[i]) ch_wdata <= {~x[i], 3'd1};
      else         ch_wdata <= {x[i], 3'(4 + ($urandom % 4))};
      @(posedge clk);
    end
    ch_we <= 1'b0;
  endtask

  // monitor: node classification, mechanisms
  always @(posedge clk) if (busy) begin
    automatic int t = int'(`CU.cmd.stage);
    automatic int i = int'(`CU.cmd.idx);
    automatic int cl;
    case (`CU.cmd.op)
      OP_R0: begin
        n_r0++; checks++;
        if (node_class(t, i) != 1) begin failures++; $display("FAIL R0 at t=%0d i=%0d", t, i); end
      end
      OP_REP: begin
        n_rep++; checks++;
        if (node_class(t, i) != 3) begin failures++; $display("FAIL Rep at t=%0d i=%0d", t, i); end
      end
      OP_R1_SORT: if (`CU.cmd.step == 0) begin
        n_r1++; checks++;
        if (node_class(t, i) != 2) begin failures++; $display("FAIL Rate-1 at t=%0d i=%0d", t, i); end
      end
      OP_SPC_SORT: if (`CU.cmd.step == 0) begin
        n_spc++; checks++;
        if (node_class(t, i) != 4) begin failures++; $display("FAIL SPC at t=%0d i=%0d", t, i); end
      end
      OP_SPC_PAR: begin
        for (int l = 0; l < L_MAX; l++)
          if (`DP.active[l] && `DP.par[l]) n_spc_parity_fix++;
      end
      OP_F: begin
        n_f++;
        if (t + 1 > TB) n_upper_fg++;
        if (`CU.cmd.chunk == 0) begin
          cl = node_class(t + 1, i);
          checks++;
          if (cl != 0) begin failures++; $display("FAIL descended special node t=%0d i=%0d class %0d", t+1, i, cl); end
        end
      end
      OP_G: begin n_g++; if (t + 1 > TB) n_upper_fg++; end
      OP_COMBINE: n_comb++;
      OP_UCOMBINE: n_ucomb++;
      OP_BOUNDARY: begin
        n_bnd++;
        if ($countones(list_active) > L_UP) n_prune++;
      end
      default: ;
    endcase
    if (`CU.cmd.op inside {OP_REP, OP_R1_EST, OP_SPC_EST})
      for (int r = 0; r < L_MAX; r++) begin
        if (`DP.sel_valid[r] && int'(`DP.par_of[r]) != r) n_copy++;
        if (`DP.sel_valid[r] && `DP.hyp_of[r] && `CU.cmd.op != OP_REP) n_split_keep_flip++;
      end
  end

  task automatic run_frame(input int k, input int nerr, input bit noiseless);
    int cyc, exp_cyc;
    bit ok;
    make_frame(k, nerr);
    @(posedge clk);
    start <= 1'b1; k_info <= NL'(k);
    @(posedge clk);
    start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    ok = 1;
    for (int i = 0; i < N; i++) if (x_hat[i] != x[i]) ok = 0;
    checks++;
    if (!ok) begin failures++; $display("FAIL K=%0d nerr=%0d: codeword mismatch", k, nerr); end
    if (noiseless) begin
      checks++;
      if (best_pm != 0) begin failures++; $display("FAIL K=%0d: noiseless PM %0d", k, best_pm); end
    end
    exp_cyc = sched(NL, 0) + 4;  // start, INIT, DONE and done register
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL K=%0d: %0d cycles, schedule says %0d", k, cyc, exp_cyc); end
    $display("K=%0d errors=%0d cycles=%0d pm=%0d %s", k, nerr, cyc, best_pm, ok ? "ok" : "WRONG");
  endtask

  initial begin
    v_we = 0; ch_we = 0; start = 0; k_info = '0; v_waddr = '0; v_wdata = '0;
    ch_waddr = '0; ch_wdata = '0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    build_v();
    load_v();
    foreach (K_LIST[q]) begin
      cur_k = K_LIST[q];
      for (int f = 0; f < FRAMES; f++)
        run_frame(cur_k, (f == 0) ? 0 : NERR, f == 0);
    end
    // every mechanism must have been exercised
    checks += 10;
    if (n_r0 == 0)    begin failures++; $display("FAIL no Rate-0 node"); end
    if (n_rep == 0)   begin failures++; $display("FAIL no Rep node"); end
    if (n_r1 == 0)    begin failures++; $display("FAIL no Rate-1 node"); end
    if (n_spc == 0)   begin failures++; $display("FAIL no SPC node"); end
    if (n_prune == 0) begin failures++; $display("FAIL no LPSCL pruning"); end
    if (n_copy == 0)  begin failures++; $display("FAIL no path copy"); end
    if (n_ucomb == 0 || n_comb == 0) begin failures++; $display("FAIL no combine"); end
    if (n_upper_fg == 0) begin failures++; $display("FAIL no upper-stage F/G"); end
    if (n_split_keep_flip == 0) begin failures++; $display("FAIL no flipped estimate survived"); end
    if (n_spc_parity_fix == 0) begin failures++; $display("FAIL no SPC parity correction"); end
    $display("mechanisms: R0=%0d Rep=%0d R1=%0d SPC=%0d F=%0d G=%0d combine=%0d ucombine=%0d boundary=%0d prune=%0d copy=%0d flip=%0d parity=%0d",
             n_r0, n_rep, n_r1, n_spc, n_f, n_g, n_comb, n_ucomb, n_bnd, n_prune, n_copy, n_split_keep_flip, n_spc_parity_fix);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
