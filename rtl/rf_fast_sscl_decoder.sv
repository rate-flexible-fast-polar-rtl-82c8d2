// rf_fast_sscl_decoder: rate-flexible fast polar list decoder (top level).
//
// A polar code P(N, K) of length N = 1024 is decoded by list decoding with
// the Fast-SSCL-SPC special nodes (Rate-0, Rep, Rate-1, SPC) and layered
// partitioned list sizes (LPSCL): L_MAX = 4 paths in the lower stages, only
// L_UP = 2 paths in the top log2(P) = 2 stages. The decoder needs no stored
// list of operations: the control unit infers the type of every node on the
// fly from four entries of the reliability vector v and the information
// length K, so any K in 1..N is decoded with the same hardware and the same
// memory contents. Defaults are the paper's: N = 1024, P = 4, N_PE = 64,
// L_MAX = 4, L_10 = L_9 = 2, 4-bit channel LLRs, 6-bit internal LLRs, 8-bit
// path metrics, special nodes of at most 16 (Rate-0, Rep) or 64 (Rate-1,
// SPC) bits.
//
// Use: write v (v_we/v_waddr/v_wdata, once for all rates) and the frame's
// channel LLRs (ch_we/ch_waddr/ch_wdata, 4-bit sign-magnitude, 2 fractional
// bits), then pulse start with k_info = K. busy stays high during decoding;
// done pulses for one cycle when x_hat holds the codeword estimate of the
// best path (x = u F^{(x)n}, bit i of x_hat is x_i; the information word is
// obtained by applying the same transform once more) and best_pm its path
// metric. The bit-reversal permutation of the paper's generator matrix is
// left to the channel interface (the LLRs are taken in tree order).
//
// Structure: reliability_memory -> control_unit (node identifier inside) ->
// decoder_datapath (PE sets, LLR/path/PM memories, PM calculation and
// sorting, LLR sorters) <- channel_memory.
module rf_fast_sscl_decoder
  import rf_pkg::*;
#(
  parameter int unsigned N       = 1024,
  parameter int unsigned NPE     = 64,
  parameter int unsigned L_MAX   = 4,
  parameter int unsigned P       = 4,
  parameter int unsigned L_UP    = 2,
  parameter int unsigned MAX_R0  = 16,
  parameter int unsigned MAX_REP = 16,
  parameter int unsigned MAX_R1  = 64,
  parameter int unsigned MAX_SPC = 64,
  localparam int unsigned NL     = $clog2(N)
) (
  input  logic           clk,
  input  logic           rst_n,
  // reliability vector load
  input  logic           v_we,
  input  logic [NL-1:0]  v_waddr,
  input  logic [NL-1:0]  v_wdata,
  // channel LLR load
  input  logic           ch_we,
  input  logic [NL-1:0]  ch_waddr,
  input  logic [QCH-1:0] ch_wdata,
  // frame control
  input  logic           start,
  input  logic [NL-1:0]  k_info,
  output logic           busy,
  output logic           done,
  output logic [N-1:0]   x_hat,
  output pm_t            best_pm,
  output logic [L_MAX-1:0] list_active   // valid paths in the list
);

  logic [NL-1:0]    v_addr [4];
  logic [NL-1:0]    v_data [4];
  cmd_t             cmd;
  logic [NL-1:0]    ch_off_a, ch_off_b;
  llr_t             ch_a [NPE];
  llr_t             ch_b [NPE];

  reliability_memory #(.N(N), .VW(NL), .NR(4)) u_vmem (
    .clk(clk), .we(v_we), .waddr(v_waddr), .wdata(v_wdata),
    .raddr(v_addr), .rdata(v_data)
  );

  channel_memory #(.N(N), .NPE(NPE)) u_chmem (
    .clk(clk), .we(ch_we), .waddr(ch_waddr), .wdata(ch_wdata),
    .off_a(ch_off_a), .off_b(ch_off_b), .rd_a(ch_a), .rd_b(ch_b)
  );

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

endmodule
