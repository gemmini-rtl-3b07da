// tb_accumulator: a 1 KB accumulator of 4 x 32-bit rows.
// Random overwrites and accumulating writes from both ports, checked by
// reading every touched row back (one-cycle latency) against a model kept
// here. Also checks that the DMA write port is held off (ready low) while
// the execute port writes, and that the execute write wins.
module tb_accumulator;
  localparam int DIM = 4, KB = 1, ROWS = KB * 1024 * 8 / (DIM * 32), AW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ex_wr_valid, ex_wr_accum, dma_wr_valid, dma_wr_ready, dma_wr_accum, rd_valid, rd_resp_valid;
  logic [AW-1:0] ex_wr_addr, dma_wr_addr, rd_addr;
  logic [127:0] ex_wr_data, dma_wr_data, rd_data;
  accumulator #(.DIM(DIM), .ACC_KB(KB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] model [ROWS][DIM];
  logic [127:0] d;
  int a;
  bit acc, use_ex;
  initial begin
    ex_wr_valid = 0; dma_wr_valid = 0; rd_valid = 0;
    ex_wr_addr = 0; dma_wr_addr = 0; rd_addr = 0; ex_wr_accum = 0; dma_wr_accum = 0;
    ex_wr_data = 0; dma_wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      dma_wr_valid = 1; dma_wr_addr = AW'(i); dma_wr_accum = 0;
      dma_wr_data = {$urandom, $urandom, $urandom, $urandom};
      for (int e = 0; e < DIM; e++) model[i][e] = dma_wr_data[e*32 +: 32];
    end
    @(negedge clk);
    dma_wr_valid = 0;
    for (int t = 0; t < 400; t++) begin
      a = $urandom_range(0, ROWS - 1);
      acc = $urandom_range(0, 1);
      use_ex = $urandom_range(0, 1);
      d = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      if (use_ex) begin
        ex_wr_valid = 1; ex_wr_addr = AW'(a); ex_wr_accum = acc; ex_wr_data = d;
        dma_wr_valid = 1; dma_wr_addr = AW'(ROWS - 1 - a); dma_wr_accum = 0; dma_wr_data = ~d;
        #1 check(!dma_wr_ready, "DMA held off while execute writes");
      end else begin
        dma_wr_valid = 1; dma_wr_addr = AW'(a); dma_wr_accum = acc; dma_wr_data = d;
        #1 check(dma_wr_ready, "DMA ready when alone");
      end
      for (int e = 0; e < DIM; e++) model[a][e] = acc ? model[a][e] + d[e*32 +: 32] : d[e*32 +: 32];
      @(negedge clk);
      ex_wr_valid = 0; dma_wr_valid = 0;
      rd_valid = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_valid = 0;
      check(rd_resp_valid, "read response");
      for (int e = 0; e < DIM; e++)
        check(rd_data[e*32 +: 32] == model[a][e], $sformatf("row %0d el %0d got %h exp %h", a, e, rd_data[e*32 +: 32], model[a][e]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
