// tb_bitshift: random 48-bit values and shifts 0..40; the result must equal
// round-half-up(x / 2^s) clamped to [-128, 127], computed here with 64-bit
// integer arithmetic.
module tb_bitshift;
  localparam int DIM = 4;
  logic [DIM*48-1:0] in;
  logic [5:0] shift;
  logic [DIM*8-1:0] out;
  bitshift #(.DIM(DIM)) dut (.*);
  int checks = 0, failures = 0;
  longint x, y;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 800; t++) begin
      for (int i = 0; i < DIM; i++) begin
        x = longint'($signed({$urandom, $urandom})) >>> $urandom_range(16, 62);
        in[i*48 +: 48] = 48'(x);
      end
      shift = 6'($urandom_range(0, 40));
      #1;
      for (int i = 0; i < DIM; i++) begin
        x = longint'($signed(in[i*48 +: 48]));
        y = (shift == 0) ? x : ((x + (longint'(1) << (shift - 1))) >>> shift);
        if (y > 127) y = 127;
        if (y < -128) y = -128;
        checks++;
        if ($signed(out[i*8 +: 8]) != y) begin
          failures++;
          if (failures < 10) $display("FAIL: %0d >> %0d got %0d exp %0d", x, shift, $signed(out[i*8 +: 8]), y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
