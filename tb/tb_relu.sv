// tb_relu: every 8-bit input value under each activation and several
// ReLU6 shifts, compared with max(x,0) and min(max(x,0), min(6<<s, 127)).
module tb_relu;
  import gemmini_pkg::*;
  localparam int DIM = 4;
  logic [DIM*8-1:0] in, out;
  act_t act;
  logic [3:0] relu6_shift;
  relu #(.DIM(DIM)) dut (.*);
  int checks = 0, failures = 0;
  int x, y, bound;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int a = 0; a < 3; a++)
      for (int s = 0; s < 6; s++)
        for (int v = -128; v < 128; v += 4) begin
          act = act_t'(a);
          relu6_shift = 4'(s);
          for (int i = 0; i < DIM; i++) in[i*8 +: 8] = 8'(v + i);
          #1;
          bound = 6 << s;
          if (bound > 127) bound = 127;
          for (int i = 0; i < DIM; i++) begin
            x = v + i;
            y = (a == 0) ? x : (x < 0) ? 0 : (a == 2 && x > bound) ? bound : x;
            checks++;
            if ($signed(out[i*8 +: 8]) != y) begin
              failures++;
              if (failures < 10) $display("FAIL: act %0d s %0d x %0d got %0d exp %0d", a, s, x, $signed(out[i*8 +: 8]), y);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
