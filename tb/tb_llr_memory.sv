// tb_llr_memory: random chunk writes, reads and path copies on a
// 4-instance memory of stages 0..5 with 8-LLR chunks, against a model that
// keeps each stage as its own array.
module tb_llr_memory;
  import rf_pkg::*;
  localparam int NI = 4, SH = 5, NPE = 8, AW = $clog2((1 << (SH + 1)) - 1) + 1;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [STW-1:0] rd_stage, wr_stage;
  logic [AW-1:0] rd_off_a, rd_off_b, wr_off;
  llr_t rd_a [NI][NPE], rd_b [NI][NPE], wr_data [NI][NPE];
  logic [NI-1:0] wr_en;
  logic [$clog2(NPE):0] wr_cnt;
  logic cp_en;
  logic [1:0] cp_src [NI];
  llr_t model [NI][SH+1][1 << SH];

  always #5 clk = ~clk;
  llr_memory #(.N_INST(NI), .S_LO(0), .S_HI(SH), .NPE(NPE)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    llr_t nm [NI][SH+1][1 << SH];
    wr_en = 0; cp_en = 0; wr_cnt = 0; wr_stage = 0; wr_off = 0; rd_stage = 0; rd_off_a = 0; rd_off_b = 0;
    for (int j = 0; j < NI; j++) cp_src[j] = 2'(j);
    // fill everything
    for (int st = 0; st <= SH; st++)
      for (int c = 0; c < (((1 << st) + NPE - 1) / NPE); c++) begin
        @(negedge clk);
        wr_en = '1; wr_stage = STW'(st); wr_off = AW'(c * NPE);
        wr_cnt = ((1 << st) < NPE) ? 4'(1 << st) : 4'(NPE);
        for (int j = 0; j < NI; j++) for (int k = 0; k < NPE; k++) begin
          wr_data[j][k] = llr_t'($urandom);
          if (c * NPE + k < (1 << st)) model[j][st][c * NPE + k] = wr_data[j][k];
        end
      end
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // check a random read
      begin
        automatic int st = 1 + $urandom % SH;
        automatic int half = 1 << (st - 1);
        automatic int nch = (half + NPE - 1) / NPE;
        automatic int c = $urandom % nch;
        rd_stage = STW'(st); rd_off_a = AW'(c * NPE); rd_off_b = AW'(half + c * NPE);
        #1;
        for (int j = 0; j < NI; j++) for (int k = 0; k < NPE; k++)
          if (c * NPE + k < half) begin
            checks += 2;
            if (rd_a[j][k] != model[j][st][c * NPE + k]) failures++;
            if (rd_b[j][k] != model[j][st][half + c * NPE + k]) failures++;
          end
      end
      // random write or copy
      wr_en = 0; cp_en = 0;
      if ($urandom % 4 == 0) begin
        cp_en = 1;
        for (int j = 0; j < NI; j++) cp_src[j] = 2'($urandom);
        nm = model;
        for (int j = 0; j < NI; j++) nm[j] = model[cp_src[j]];
        model = nm;
      end else begin
        automatic int st = $urandom % (SH + 1);
        automatic int nch = ((1 << st) + NPE - 1) / NPE;
        automatic int c = $urandom % nch;
        wr_en = NI'($urandom); wr_stage = STW'(st); wr_off = AW'(c * NPE);
        wr_cnt = ((1 << st) < NPE) ? 4'(1 << st) : 4'(NPE);
        for (int j = 0; j < NI; j++) for (int k = 0; k < NPE; k++) begin
          wr_data[j][k] = llr_t'($urandom);
          if (wr_en[j] && c * NPE + k < (1 << st)) model[j][st][c * NPE + k] = wr_data[j][k];
        end
      end
    end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
