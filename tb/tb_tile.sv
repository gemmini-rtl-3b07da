// tb_tile: a 2x3 tile (2 PE rows, 3 PE columns) joined combinationally.
// Weights are shifted into the tile through the preload chain (last row
// first), then row vectors are applied and the bottom outputs are checked,
// in the same cycle, against a*W + b, computed here. Also checks that a
// leaves the right edge unchanged and that output-stationary accumulation
// over 3 cycles gives the product of a 2x3 by 3x3 stream.
module tb_tile;
  import gemmini_pkg::*;
  localparam int R = 2, C = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [7:0]  in_a[R], out_a[R];
  logic signed [31:0] in_b[C], in_d[C], out_b[C], out_d[C];
  pe_ctrl_t in_ctrl[C], out_ctrl[C];
  tile #(.TILE_ROWS(R), .TILE_COLS(C)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_ctrl(bit v, bit l, dataflow_t df);
    for (int c = 0; c < C; c++) in_ctrl[c] = '{valid: v, load: l, df: df};
  endtask

  logic signed [7:0] W[R][C], A[R][C];
  logic signed [31:0] exp, os[R][C];
  initial begin
    for (int r = 0; r < R; r++) in_a[r] = 0;
    for (int c = 0; c < C; c++) begin in_b[c] = 0; in_d[c] = 0; end
    set_ctrl(0, 0, DF_WS);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) W[r][c] = 8'($urandom);
      for (int s = 0; s < R; s++) begin
        @(negedge clk);
        set_ctrl(0, 1, DF_WS);
        for (int c = 0; c < C; c++) in_d[c] = 32'(W[R-1-s][c]);
      end
      for (int v = 0; v < 5; v++) begin
        @(negedge clk);
        set_ctrl(1, 0, DF_WS);
        for (int r = 0; r < R; r++) in_a[r] = 8'($urandom);
        for (int c = 0; c < C; c++) in_b[c] = 32'($urandom_range(0, 100));
        #1;
        for (int c = 0; c < C; c++) begin
          exp = in_b[c];
          for (int r = 0; r < R; r++) exp += in_a[r] * W[r][c];
          check(out_b[c] == exp, $sformatf("WS col %0d got %0d exp %0d", c, out_b[c], exp));
        end
        for (int r = 0; r < R; r++) check(out_a[r] == in_a[r], "a exits right");
      end
      // OS: clear (R loads of zero), accumulate 3 waves, check registers via drain
      for (int s = 0; s < R; s++) begin
        @(negedge clk);
        set_ctrl(0, 1, DF_OS);
        for (int c = 0; c < C; c++) in_d[c] = 0;
      end
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) os[r][c] = 0;
      for (int k = 0; k < 3; k++) begin
        @(negedge clk);
        set_ctrl(1, 0, DF_OS);
        for (int r = 0; r < R; r++) in_a[r] = 8'($urandom);
        for (int c = 0; c < C; c++) in_b[c] = 32'($signed(8'($urandom)));
        #1;
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) os[r][c] += in_a[r] * in_b[c];
      end
      @(negedge clk);
      set_ctrl(0, 0, DF_OS);
      #1;
      for (int c = 0; c < C; c++)
        check(out_d[c] == os[R-1][c], $sformatf("OS bottom row col %0d got %0d exp %0d", c, out_d[c], os[R-1][c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
