// tb_transposer: for DIM 4 and DIM 16, writes random blocks one row per
// cycle and reads every column, which must equal the block's transpose.
module tb_transposer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic w4, w16;
  logic [1:0] wi4, ri4;
  logic [3:0] wi16, ri16;
  logic [4*8-1:0] wr4, rc4;
  logic [16*8-1:0] wr16, rc16;
  transposer #(.DIM(4))  t4  (.clk, .wr_en(w4),  .wr_idx(wi4),  .wr_row(wr4),  .rd_idx(ri4),  .rd_col(rc4));
  transposer #(.DIM(16)) t16 (.clk, .wr_en(w16), .wr_idx(wi16), .wr_row(wr16), .rd_idx(ri16), .rd_col(rc16));

  logic [7:0] m4 [4][4];
  logic [7:0] m16 [16][16];
  initial begin
    w4 = 0; w16 = 0; wi4 = 0; wi16 = 0; ri4 = 0; ri16 = 0; wr4 = 0; wr16 = 0;
    for (int t = 0; t < 20; t++) begin
      for (int r = 0; r < 16; r++) begin
        @(negedge clk);
        w16 = 1; wi16 = 4'(r);
        w4 = (r < 4); wi4 = 2'(r);
        for (int c = 0; c < 16; c++) begin
          m16[r][c] = 8'($urandom);
          wr16[c*8 +: 8] = m16[r][c];
          if (r < 4 && c < 4) begin m4[r][c] = 8'($urandom); wr4[c*8 +: 8] = m4[r][c]; end
        end
      end
      @(negedge clk);
      w4 = 0; w16 = 0;
      for (int c = 0; c < 16; c++) begin
        ri16 = 4'(c); ri4 = 2'(c);
        #1;
        for (int r = 0; r < 16; r++) begin
          checks++;
          if (rc16[r*8 +: 8] != m16[r][c]) begin failures++; if (failures < 10) $display("FAIL16 r%0d c%0d", r, c); end
          if (c < 4 && r < 4) begin
            checks++;
            if (rc4[r*8 +: 8] != m4[r][c]) begin failures++; if (failures < 10) $display("FAIL4 r%0d c%0d", r, c); end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
