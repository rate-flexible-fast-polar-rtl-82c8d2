// tb_path_memory: random node writes, partial-sum combines and path copies
// (with a write on top of the copy) on 4 instances of 64 bits, against a
// bit-array model of eq. (10).
module tb_path_memory;
  import rf_pkg::*;
  localparam int NI = 4, W = 64, WIN = 16, PW = $clog2(W) + 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [NI-1:0] wr_en;
  logic [PW-1:0] wr_pos, cb_pos;
  logic [STW-1:0] wr_t, cb_t;
  logic [WIN-1:0] wr_data [NI];
  logic cb_en, cp_en;
  logic [1:0] cp_src [NI];
  logic [W-1:0] rd [NI];
  bit model [NI][W];

  always #5 clk = ~clk;
  path_memory #(.N_INST(NI), .W(W), .WIN(WIN)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    bit nm [NI][W];
    wr_en = '1; cb_en = 0; cp_en = 0; cb_pos = 0; cb_t = 0;
    for (int j = 0; j < NI; j++) cp_src[j] = 2'(j);
    // clear by writes
    for (int p = 0; p < W; p += WIN) begin
      @(negedge clk); wr_pos = PW'(p); wr_t = 4; for (int j = 0; j < NI; j++) wr_data[j] = '0;
    end
    for (int j = 0; j < NI; j++) for (int b = 0; b < W; b++) model[j][b] = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      wr_en = 0; cb_en = 0; cp_en = 0;
      nm = model;
      case ($urandom % 3)
        0: begin
          automatic int t = $urandom % 5;
          automatic int T = 1 << t;
          automatic int p = ($urandom % (W / T)) * T;
          wr_en = NI'($urandom); wr_pos = PW'(p); wr_t = STW'(t);
          for (int j = 0; j < NI; j++) begin
            wr_data[j] = WIN'($urandom);
            if (wr_en[j]) for (int b = 0; b < T; b++) nm[j][p + b] = wr_data[j][b];
          end
        end
        1: begin
          automatic int t = $urandom % 5;
          automatic int T = 1 << t;
          automatic int p = ($urandom % (W / (2 * T))) * 2 * T;
          cb_en = 1; cb_pos = PW'(p); cb_t = STW'(t);
          for (int j = 0; j < NI; j++) for (int b = 0; b < T; b++) nm[j][p + b] = model[j][p + b] ^ model[j][p + T + b];
        end
        default: begin
          automatic int t = $urandom % 3;
          automatic int p = ($urandom % (W / (1 << t))) * (1 << t);
          cp_en = 1;
          wr_en = NI'($urandom); wr_pos = PW'(p); wr_t = STW'(t);
          for (int j = 0; j < NI; j++) begin
            cp_src[j] = 2'($urandom);
            nm[j] = model[cp_src[j]];
            wr_data[j] = WIN'($urandom);
            if (wr_en[j]) for (int b = 0; b < (1 << t); b++) nm[j][p + b] = wr_data[j][b];
          end
        end
      endcase
      model = nm;
      @(negedge clk);
      wr_en = 0; cb_en = 0; cp_en = 0;
      for (int j = 0; j < NI; j++) for (int b = 0; b < W; b++) begin
        checks++;
        if (rd[j][b] != model[j][b]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
