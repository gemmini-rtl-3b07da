// tb_pooling_engine: random rows with random gaps, window sizes 0..4.
// Expected output rows (element-wise signed maximum of each group of
// pool_size consecutive rows, or every row for size 0/1) are queued by a
// model and compared as out_valid pulses arrive; each output must come one
// cycle after the last row of its window. clear between runs drops a
// half-filled window.
module tb_pooling_engine;
  localparam int DIM = 4, MAX_POOL = 4, PW = $clog2(MAX_POOL + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid, out_valid;
  logic [PW-1:0] pool_size;
  logic [DIM*8-1:0] in_row, out_row;
  pooling_engine #(.DIM(DIM), .MAX_POOL(MAX_POOL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DIM*8-1:0] expq [$];
  logic [DIM*8-1:0] acc;
  int   dueq [$];
  int n, ps, nrows, n_out = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    check(expq.size() > 0 && out_row == expq[0], "pooled row value");
    check(dueq.size() > 0 && dueq[0] == cyc, "output one cycle after the window's last row");
    if (expq.size() > 0) begin void'(expq.pop_front()); void'(dueq.pop_front()); end
    n_out++;
  end

  initial begin
    clear = 0; in_valid = 0; in_row = '0; pool_size = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      ps = $urandom_range(0, MAX_POOL);
      nrows = $urandom_range(1, 20);
      @(negedge clk);
      clear = 1; pool_size = PW'(ps);
      @(negedge clk);
      clear = 0;
      n = 0;
      for (int r = 0; r < nrows; r++) begin
        while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_row = $urandom;
        for (int i = 0; i < DIM; i++)
          if (n == 0 || $signed(in_row[i*8 +: 8]) > $signed(acc[i*8 +: 8])) acc[i*8 +: 8] = in_row[i*8 +: 8];
        n++;
        if (ps <= 1 || n == ps) begin expq.push_back(acc); dueq.push_back(cyc + 1); n = 0; end
        @(negedge clk);
        in_valid = 0;
      end
      @(negedge clk);
    end
    repeat (3) @(negedge clk);
    check(expq.size() == 0, "all expected rows produced");
    check(n_out > 100, "enough outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
