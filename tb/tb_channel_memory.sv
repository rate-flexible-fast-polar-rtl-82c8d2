// tb_channel_memory: loads 64 random 4-bit channel LLRs and checks random
// read windows, including the conversion to the internal 6-bit format
// (sign kept, magnitude zero-extended, a zero never negative).
module tb_channel_memory;
  import rf_pkg::*;
  localparam int N = 64, NPE = 8;
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [5:0] waddr, off_a, off_b;
  logic [QCH-1:0] wdata;
  llr_t rd_a [NPE], rd_b [NPE];
  logic [QCH-1:0] model [N];

  always #5 clk = ~clk;
  channel_memory #(.N(N), .NPE(NPE)) dut (.*);

  function automatic bit same(input llr_t g, input logic [QCH-1:0] m);
    return (g.m == MAGW'(m[2:0])) && (g.s == (m[3] && m[2:0] != 0));
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    we = 0; off_a = 0; off_b = 0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = 4'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 300; it++) begin
      off_a = 6'(($urandom % (N / NPE)) * NPE); off_b = 6'($urandom % (N - NPE));
      #1;
      for (int k = 0; k < NPE; k++) begin
        checks += 2;
        if (!same(rd_a[k], model[off_a + k])) failures++;
        if (!same(rd_b[k], model[off_b + k])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
