// tb_reliability_memory: fills a 64-entry memory, then reads four random
// addresses per cycle and checks each port one cycle later.
module tb_reliability_memory;
  localparam int N = 64, VW = 6;
  int checks = 0, failures = 0;
  logic clk = 0, we;
  logic [5:0] waddr, raddr [4];
  logic [VW-1:0] wdata, rdata [4];
  logic [VW-1:0] model [N];
  logic [5:0] last [4];

  always #5 clk = ~clk;
  reliability_memory #(.N(N), .VW(VW), .NR(4)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    we = 0;
    for (int q = 0; q < 4; q++) raddr[q] = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = VW'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 500; it++) begin
      for (int q = 0; q < 4; q++) begin raddr[q] = 6'($urandom); last[q] = raddr[q]; end
      @(negedge clk);
      for (int q = 0; q < 4; q++) begin
        checks++;
        if (rdata[q] !== model[last[q]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d addr %0d: %0d vs %0d", q, last[q], rdata[q], model[last[q]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
