// tb_im2col: random convolution shapes (input width, output width, stride,
// kernel offset, base, starting pixel). After start, and after each of a
// random number of steps, addr must equal
// base + (oh*stride + kh)*in_w + ow*stride + kw for the current output
// pixel, with ow wrapping at out_w into the next oh.
module tb_im2col;
  import gemmini_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, step;
  logic [31:0] base, addr;
  im2col_cfg_t cfg;
  logic [15:0] oh0, ow0;
  im2col dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int oh, ow, ex, nsteps;
  initial begin
    start = 0; step = 0; base = 0; cfg = '0; oh0 = 0; ow0 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      cfg.en = 1;
      cfg.stride = 8'($urandom_range(1, 3));
      cfg.kh = 8'($urandom_range(0, 4));
      cfg.kw = 8'($urandom_range(0, 4));
      cfg.out_w = 16'($urandom_range(1, 20));
      cfg.in_w = 16'(cfg.out_w * cfg.stride + cfg.kw);
      base = $urandom_range(0, 5000);
      oh = $urandom_range(0, 10);
      ow = $urandom_range(0, cfg.out_w - 1);
      oh0 = 16'(oh); ow0 = 16'(ow);
      start = 1;
      @(negedge clk);
      start = 0;
      nsteps = $urandom_range(1, 60);
      for (int s = 0; s <= nsteps; s++) begin
        ex = base + (oh * cfg.stride + cfg.kh) * cfg.in_w + ow * cfg.stride + cfg.kw;
        checks++;
        if (addr != 32'(ex)) begin
          failures++;
          if (failures < 10) $display("FAIL: oh %0d ow %0d got %0d exp %0d", oh, ow, addr, ex);
        end
        step = $urandom_range(0, 1);
        if (step) begin
          ow++;
          if (ow >= cfg.out_w) begin ow = 0; oh++; end
        end
        @(negedge clk);
        step = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
