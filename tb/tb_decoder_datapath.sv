// tb_decoder_datapath: test of the decoder datapath (PE sets, LLR, path and
// PM memories, PM calculation and sorting, LLR sorters, LPSCL boundary) at
// N = 64, N_PE = 8, P = 4, L_MAX = 4, L_UP = 2, where F/G work in several
// chunks per stage and special nodes are limited to 8 bits.
//
// The command stream comes from a control_unit instance (tested on its own
// in tb_control_unit); the reliability and channel memories are plain
// behavioural arrays in this testbench. Checks, over five code rates and
// noiseless and noisy frames (see tb_decoder_common.svh): decoded codeword,
// zero path metric when noiseless, command classes and cycle count, and that
// every datapath mechanism (path copy, flipped estimates, SPC parity fix,
// pruning at the partition boundary, upper-stage F/G and combines) occurs.
module tb_decoder_datapath;
  import rf_pkg::*;

  localparam int unsigned N = 64, NPE = 8, L_MAX = 4, P = 4, L_UP = 2;
  localparam int unsigned MAX_R0 = 16, MAX_REP = 16, MAX_R1 = 64, MAX_SPC = 64;
  localparam int unsigned NL = $clog2(N);
  localparam int FRAMES = 8, NERR = 3;
  localparam int K_LIST [5] = '{5, 11, 21, 32, 43};  // R = 1/12 .. 2/3

  logic clk = 0;
  logic rst_n, v_we, ch_we, start, busy, done;
  logic [NL-1:0] v_waddr, v_wdata, ch_waddr, k_info;
  logic [QCH-1:0] ch_wdata;
  logic [N-1:0] x_hat;
  pm_t best_pm;
  logic [L_MAX-1:0] list_active;

  // behavioural reliability memory (one-cycle read) and channel memory
  logic [NL-1:0]  vmem [N];
  logic [QCH-1:0] chmem [N];
  logic [NL-1:0]  v_addr [4];
  logic [NL-1:0]  v_data [4];
  logic [NL-1:0]  ch_off_a, ch_off_b;
  llr_t           ch_a [NPE];
  llr_t           ch_b [NPE];
  cmd_t           cmd;

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (v_we)  vmem[v_waddr]   <= v_wdata;
    if (ch_we) chmem[ch_waddr] <= ch_wdata;
    for (int p = 0; p < 4; p++) v_data[p] <= vmem[v_addr[p]];
  end

  always_comb
    for (int k = 0; k < NPE; k++) begin
      ch_a[k].s = chmem[(int'(ch_off_a) + k) % N][3] && (chmem[(int'(ch_off_a) + k) % N][2:0] != 0);
      ch_a[k].m = MAGW'(chmem[(int'(ch_off_a) + k) % N][2:0]);
      ch_b[k].s = chmem[(int'(ch_off_b) + k) % N][3] && (chmem[(int'(ch_off_b) + k) % N][2:0] != 0);
      ch_b[k].m = MAGW'(chmem[(int'(ch_off_b) + k) % N][2:0]);
    end

  control_unit #(
    .N(N), .NPE(NPE), .L_MAX(L_MAX), .P(P),
    .MAX_R0(MAX_R0), .MAX_REP(MAX_REP), .MAX_R1(MAX_R1), .MAX_SPC(MAX_SPC)
  ) u_cu (
    .clk(clk), .rst_n(rst_n), .start(start), .k_info(k_info),
    .v_addr(v_addr), .v_data(v_data), .cmd(cmd), .node_type(),
    .busy(busy), .done(done)
  );

  decoder_datapath #(
    .N(N), .NPE(NPE), .L_MAX(L_MAX), .P(P), .L_UP(L_UP)
  ) u_dp (
    .clk(clk), .rst_n(rst_n), .cmd(cmd),
    .ch_off_a(ch_off_a), .ch_off_b(ch_off_b), .ch_a(ch_a), .ch_b(ch_b),
    .x_hat(x_hat), .best_pm(best_pm), .active(list_active)
  );

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

`define CU u_cu
`define DP u_dp
  `include "tb_decoder_common.svh"
endmodule
