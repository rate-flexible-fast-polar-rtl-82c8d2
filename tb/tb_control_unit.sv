// tb_control_unit: test of the tree walker and on-line node identification
// at N = 256, N_PE = 16, P = 4 with a behavioural reliability memory
// (one-cycle read), for every K = 1..N-1 in steps of 3, plus K = N-1.
//
// Independently of the design, the testbench computes the frozen pattern
// from the reliability order (polarization weights) and K, and checks:
//  * every special node command (Rate-0, Rep, Rate-1, SPC) is issued for a
//    node whose whole frozen pattern has that class and fits the size
//    limits, and every node the walker descends into is not such a node;
//  * the special nodes tile the code: each starts where the previous one
//    ended, and the last ends at N;
//  * the sub-step counts of Rate-1 (min(L-1, T) sorts and estimates) and
//    SPC (min(L, T) sorts, one fewer estimates) nodes;
//  * an OP_BOUNDARY follows every finished subtree of N/P bits;
//  * the frame takes exactly the number of cycles of the schedule.
module tb_control_unit;
  import rf_pkg::*;

  localparam int unsigned N = 256, NPE = 16, L_MAX = 4, P = 4;
  localparam int unsigned MAX_R0 = 16, MAX_REP = 16, MAX_R1 = 64, MAX_SPC = 64;
  localparam int unsigned NL = $clog2(N);
  localparam int unsigned NSUB = N / P;
  localparam int unsigned TB = NL - $clog2(P);

  int checks = 0, failures = 0;
  logic clk = 0;
  logic rst_n, start, busy, done;
  logic [NL-1:0] k_info;
  logic [NL-1:0] v_addr [4];
  logic [NL-1:0] v_data [4];
  cmd_t cmd;
  node_e node_type;

  int v [N];
  bit s [N];
  int next_bit;
  int n_sort, n_est, cur_t, cur_i, n_bnd, n_spec;
  bit in_r1, in_spc;

  always #5 clk = ~clk;

  always @(posedge clk)
    for (int p = 0; p < 4; p++) v_data[p] <= NL'(v[v_addr[p]]);

  control_unit #(
    .N(N), .NPE(NPE), .L_MAX(L_MAX), .P(P),
    .MAX_R0(MAX_R0), .MAX_REP(MAX_REP), .MAX_R1(MAX_R1), .MAX_SPC(MAX_SPC)
  ) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int unsigned clipsz(input int unsigned m);
    int unsigned r = m;
    if (r > NPE)  r = NPE;
    if (r > NSUB) r = NSUB;
    return r;
  endfunction

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

  function automatic int sched(input int t, input int i);
    int T = 1 << t;
    int c, fin, s1, s2, ch;
    fin = (t == TB) ? 2 : 1;
    c = 2;
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

  task automatic expect_class(input int t, input int i, input int cl, input string what);
    checks += 2;
    if (node_class(t, i) != cl) begin failures++; $display("FAIL %s at t=%0d i=%0d", what, t, i); end
    if (i != next_bit) begin failures++; $display("FAIL %s at i=%0d, expected start %0d", what, i, next_bit); end
    next_bit = i + (1 << t);
    n_spec++;
  endtask

  // command monitor
  always @(posedge clk) if (busy && rst_n) begin
    automatic int t = int'(cmd.stage);
    automatic int i = int'(cmd.idx);
    // end of a multi-step node: check the sub-step counts
    if (in_r1 && cmd.op != OP_R1_SORT && cmd.op != OP_R1_EST) begin
      automatic int T = 1 << cur_t;
      automatic int e = (L_MAX - 1 < T) ? L_MAX - 1 : T;
      checks++;
      if (cmd.op != OP_R1_HARD || n_sort != e || n_est != e) begin
        failures++; $display("FAIL Rate-1 steps at t=%0d: %0d sorts %0d estimates", cur_t, n_sort, n_est);
      end
      in_r1 = 0;
    end
    if (in_spc && cmd.op != OP_SPC_SORT && cmd.op != OP_SPC_EST) begin
      automatic int T = 1 << cur_t;
      automatic int e = (L_MAX < T) ? L_MAX : T;
      checks++;
      if (cmd.op != OP_SPC_HARD || n_sort != e || n_est != e - 1) begin
        failures++; $display("FAIL SPC steps at t=%0d: %0d sorts %0d estimates", cur_t, n_sort, n_est);
      end
      in_spc = 0;
    end
    case (cmd.op)
      OP_R0:  expect_class(t, i, 1, "Rate-0");
      OP_REP: expect_class(t, i, 3, "Rep");
      OP_R1_SORT: begin
        if (cmd.step == 0) begin
          expect_class(t, i, 2, "Rate-1");
          in_r1 = 1; n_sort = 0; n_est = 0; cur_t = t; cur_i = i;
        end
        n_sort++;
      end
      OP_R1_EST: n_est++;
      OP_SPC_SORT: begin
        if (cmd.step == 0) begin
          expect_class(t, i, 4, "SPC");
          in_spc = 1; n_sort = 0; n_est = 0; cur_t = t; cur_i = i;
        end
        n_sort++;
      end
      OP_SPC_EST: n_est++;
      OP_F: if (cmd.chunk == 0) begin
        checks++;
        if (node_class(t + 1, i) != 0) begin failures++; $display("FAIL descended special node t=%0d i=%0d", t + 1, i); end
      end
      OP_BOUNDARY: begin
        checks++;
        n_bnd++;
        if (t != TB || next_bit != i + int'(NSUB) || (i % NSUB) != 0) begin
          failures++; $display("FAIL boundary at t=%0d i=%0d (next bit %0d)", t, i, next_bit);
        end
      end
      default: ;
    endcase
  end

  task automatic run_frame(input int k);
    int cyc, exp_cyc;
    for (int i = 0; i < N; i++) s[i] = (v[i] < k);
    next_bit = 0; n_bnd = 0; n_spec = 0; in_r1 = 0; in_spc = 0;
    @(posedge clk);
    start <= 1'b1; k_info <= NL'(k);
    @(posedge clk);
    start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    exp_cyc = sched(NL, 0) + 4;
    checks += 3;
    if (cyc != exp_cyc) begin failures++; $display("FAIL K=%0d: %0d cycles, schedule says %0d", k, cyc, exp_cyc); end
    if (next_bit != N)  begin failures++; $display("FAIL K=%0d: nodes end at bit %0d", k, next_bit); end
    if (n_bnd != P)     begin failures++; $display("FAIL K=%0d: %0d boundaries", k, n_bnd); end
  endtask

  initial begin
    start = 0; k_info = '0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    build_v();
    for (int k = 1; k < N; k += 3) run_frame(k);
    run_frame(N - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
