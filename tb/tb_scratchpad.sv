// tb_scratchpad: a 4 KB, 4-bank scratchpad of 4-element rows.
// Writes random rows through the DMA port, reads them back through both
// ports (one-cycle latency) and compares with a copy kept here. Then
// reads from the execute port and the DMA port in the same cycle: to the
// same bank the DMA must see ready low, to different banks both proceed.
// Finally writes from both ports in the same cycle: the execute write always
// lands, the DMA write waits (ready low) when both use the same bank; every
// row is then read back and compared.
module tb_scratchpad;
  localparam int DIM = 4, KB = 4, ROWS = KB * 1024 * 8 / (DIM * 8), AW = $clog2(ROWS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ex_rd_valid, ex_rd_resp_valid, dma_rd_valid, dma_rd_ready, dma_rd_resp_valid;
  logic dma_wr_valid, dma_wr_ready, dma_conflict, ex_wr_valid;
  logic [AW-1:0] ex_rd_addr, dma_rd_addr, dma_wr_addr, ex_wr_addr;
  logic [31:0] ex_rd_data, dma_rd_data, dma_wr_data, ex_wr_data;
  scratchpad #(.DIM(DIM), .SP_KB(KB), .SP_BANKS(4)) dut (.*);

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

  logic [31:0] model [ROWS];
  int a, b;
  initial begin
    ex_rd_valid = 0; dma_rd_valid = 0; dma_wr_valid = 0; ex_wr_valid = 0; ex_wr_addr = 0; ex_wr_data = 0;
    ex_rd_addr = 0; dma_rd_addr = 0; dma_wr_addr = 0; dma_wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      dma_wr_valid = 1; dma_wr_addr = AW'(i); dma_wr_data = $urandom;
      model[i] = dma_wr_data;
    end
    @(negedge clk);
    dma_wr_valid = 0;
    for (int t = 0; t < 300; t++) begin
      a = $urandom_range(0, ROWS - 1);
      b = $urandom_range(0, ROWS - 1);
      @(negedge clk);
      ex_rd_valid = 1; ex_rd_addr = AW'(a);
      dma_rd_valid = 1; dma_rd_addr = AW'(b);
      #1;
      check(dma_rd_ready == ((a / (ROWS/4)) != (b / (ROWS/4))),
            $sformatf("bank arbitration a=%0d b=%0d ready=%0d", a, b, dma_rd_ready));
      check(dma_conflict == !dma_rd_ready, "conflict flag");
      @(negedge clk);
      ex_rd_valid = 0;
      check(ex_rd_resp_valid && ex_rd_data == model[a], $sformatf("ex read row %0d", a));
      if (dma_rd_resp_valid) check(dma_rd_data == model[b], $sformatf("dma read row %0d", b));
      else begin
        #1;
        check(dma_rd_ready, "dma alone is ready");
        @(negedge clk);
        check(dma_rd_resp_valid && dma_rd_data == model[b], $sformatf("dma retry row %0d", b));
      end
      dma_rd_valid = 0;
    end
    for (int t = 0; t < 300; t++) begin
      a = $urandom_range(0, ROWS - 1);
      b = $urandom_range(0, ROWS - 1);
      if (a == b) b = (b + 1) % ROWS;
      @(negedge clk);
      ex_wr_valid = 1; ex_wr_addr = AW'(a); ex_wr_data = $urandom;
      dma_wr_valid = 1; dma_wr_addr = AW'(b); dma_wr_data = $urandom;
      model[a] = ex_wr_data;
      #1;
      check(dma_wr_ready == ((a / (ROWS/4)) != (b / (ROWS/4))), "write bank arbitration");
      if (dma_wr_ready) model[b] = dma_wr_data;
      else begin
        @(negedge clk);
        ex_wr_valid = 0;
        #1 check(dma_wr_ready, "DMA write ready when alone");
        model[b] = dma_wr_data;
      end
      @(negedge clk);
      ex_wr_valid = 0; dma_wr_valid = 0;
    end
    for (int i = 0; i < ROWS; i++) begin
      @(negedge clk);
      ex_rd_valid = 1; ex_rd_addr = AW'(i);
      @(negedge clk);
      ex_rd_valid = 0;
      check(ex_rd_data == model[i], $sformatf("row %0d after mixed writes", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
