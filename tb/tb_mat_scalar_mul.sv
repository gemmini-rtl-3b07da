// tb_mat_scalar_mul: random signed 32-bit elements times random unsigned
// 16-bit scalars, compared with 64-bit products computed here.
module tb_mat_scalar_mul;
  localparam int DIM = 4;
  logic [DIM*32-1:0] in;
  logic [15:0] scale;
  logic [DIM*48-1:0] out;
  mat_scalar_mul #(.DIM(DIM)) dut (.*);
  int checks = 0, failures = 0;
  longint exp;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 500; t++) begin
      in = {$urandom, $urandom, $urandom, $urandom};
      scale = (t % 5 == 0) ? 16'hFFFF : 16'($urandom);
      #1;
      for (int i = 0; i < DIM; i++) begin
        exp = longint'($signed(in[i*32 +: 32])) * longint'(scale);
        checks++;
        if ($signed(out[i*48 +: 48]) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL: %0d * %0d got %0d", $signed(in[i*32 +: 32]), scale, $signed(out[i*48 +: 48]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
