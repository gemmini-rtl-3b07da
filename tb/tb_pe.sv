// tb_pe: checks one processing element against a reference model.
// Random operands; checks the weight-stationary MAC path (out_b = in_b + a*w),
// the output-stationary accumulation over several cycles, the preload shift
// (out_d shows the old register, the register takes in_d) and that a and the
// control pass through unchanged.
module tb_pe;
  import gemmini_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [7:0]  in_a, out_a;
  logic signed [31:0] in_b, in_d, out_b, out_d;
  pe_ctrl_t in_ctrl, out_ctrl;
  pe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [31:0] w, accv, exp;
  initial begin
    in_a = 0; in_b = 0; in_d = 0; in_ctrl = '{valid: 0, load: 0, df: DF_WS};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      // preload a weight
      w = 32'($signed(8'($urandom)));
      @(negedge clk);
      in_ctrl = '{valid: 0, load: 1, df: DF_WS};
      in_d = w;
      @(negedge clk);
      check(out_d == w, "preload");
      // WS MAC
      in_ctrl = '{valid: 1, load: 0, df: DF_WS};
      in_a = 8'($urandom);
      in_b = 32'($urandom_range(0, 2000)) - 1000;
      #1;
      exp = in_b + in_a * w;
      check(out_b == exp, $sformatf("WS out_b %0d exp %0d", out_b, exp));
      check(out_a == in_a && out_ctrl == in_ctrl, "pass-through");
      @(negedge clk);
      check(out_d == w, "WS keeps weight");
      // OS: clear then accumulate 4 products
      in_ctrl = '{valid: 0, load: 1, df: DF_OS};
      in_d = 0;
      @(negedge clk);
      accv = 0;
      in_ctrl = '{valid: 1, load: 0, df: DF_OS};
      for (int k = 0; k < 4; k++) begin
        in_a = 8'($urandom);
        in_b = 32'($signed(8'($urandom)));
        #1 check(out_b == in_b, "OS passes b");
        accv += in_a * in_b;
        @(negedge clk);
      end
      in_ctrl = '{valid: 0, load: 0, df: DF_OS};
      #1 check(out_d == accv, $sformatf("OS acc %0d exp %0d", out_d, accv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
