// tb_rf_fast_sscl_decoder: end-to-end test of the decoder at a reduced size
// (N = 128, N_PE = 16, P = 4, L_MAX = 4, L_UP = 2, node limits 16), over
// five code rates, noiseless and noisy frames. See tb_decoder_common.svh for
// what is checked.
module tb_rf_fast_sscl_decoder;
  import rf_pkg::*;

  localparam int unsigned N = 128, NPE = 16, L_MAX = 4, P = 4, L_UP = 2;
  localparam int unsigned MAX_R0 = 16, MAX_REP = 16, MAX_R1 = 64, MAX_SPC = 64;
  localparam int unsigned NL = $clog2(N);
  localparam int FRAMES = 6, NERR = 4;
  localparam int K_LIST [5] = '{11, 21, 43, 64, 85};  // R = 1/12 .. 2/3

  logic clk = 0;
  logic rst_n, v_we, ch_we, start, busy, done;
  logic [NL-1:0] v_waddr, v_wdata, ch_waddr, k_info;
  logic [QCH-1:0] ch_wdata;
  logic [N-1:0] x_hat;
  pm_t best_pm;
  logic [3:0] list_active;

  always #5 clk = ~clk;

  rf_fast_sscl_decoder #(
    .N(N), .NPE(NPE), .L_MAX(L_MAX), .P(P), .L_UP(L_UP),
    .MAX_R0(MAX_R0), .MAX_REP(MAX_REP), .MAX_R1(MAX_R1), .MAX_SPC(MAX_SPC)
  ) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  `include "tb_decoder_common.svh"
endmodule
