// tb_rf_decoder_full: end-to-end test of the decoder at its default size
// (the paper's configuration: N = 1024, N_PE = 64, P = 4, L_MAX = 4,
// L_10 = L_9 = 2, node limits 16/64), on the five code rates the paper
// evaluates, R = 1/12, 1/6, 1/3, 1/2, 2/3 (K = 85, 171, 341, 512, 683).
// See tb_decoder_common.svh for what is checked.
module tb_rf_decoder_full;
  import rf_pkg::*;

  localparam int unsigned N = 1024, NPE = 64, L_MAX = 4, P = 4, L_UP = 2;
  localparam int unsigned MAX_R0 = 16, MAX_REP = 16, MAX_R1 = 64, MAX_SPC = 64;
  localparam int unsigned NL = $clog2(N);
  localparam int FRAMES = 3, NERR = 8;
  localparam int K_LIST [5] = '{85, 171, 341, 512, 683};

  logic clk = 0;
  logic rst_n, v_we, ch_we, start, busy, done;
  logic [NL-1:0] v_waddr, v_wdata, ch_waddr, k_info;
  logic [QCH-1:0] ch_wdata;
  logic [N-1:0] x_hat;
  pm_t best_pm;
  logic [3:0] list_active;

  always #5 clk = ~clk;

  rf_fast_sscl_decoder dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  `include "tb_decoder_common.svh"
endmodule
