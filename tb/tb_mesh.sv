// tb_mesh: the spatial array in two shapes of the same 4x4 PE count:
// a fully pipelined 4x4 mesh of 1x1 tiles (systolic) and a 2x2 mesh of 2x2
// combinational tiles. Both get the same stream:
//   WS: 4 preload waves (weights, last row first), 4 rows of A -> A*W rows
//   OS: 4 clearing loads, 4 waves (A column k, B row k), 4 draining loads
//       -> rows of A*B, last row first
// Results are compared with products computed here, and the delay from a
// wave entering to its result leaving is checked against the pipeline
// depth MESH_ROWS + MESH_COLS - 2 (6 and 2 cycles).
module tb_mesh;
  import gemmini_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [7:0]  in_a[N];
  logic signed [31:0] in_b[N], in_d[N];
  pe_ctrl_t           in_ctrl;
  logic signed [31:0] ob1[N], od1[N], ob2[N], od2[N];
  pe_ctrl_t           k1, k2;

  mesh #(.MESH_ROWS(4), .MESH_COLS(4), .TILE_ROWS(1), .TILE_COLS(1)) m1 (
    .clk, .rst_n, .in_a, .in_b, .in_d, .in_ctrl, .out_b(ob1), .out_d(od1), .out_ctrl(k1));
  mesh #(.MESH_ROWS(2), .MESH_COLS(2), .TILE_ROWS(2), .TILE_COLS(2)) m2 (
    .clk, .rst_n, .in_a, .in_b, .in_d, .in_ctrl, .out_b(ob2), .out_d(od2), .out_ctrl(k2));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // result capture
  logic signed [31:0] ws1[$][N], ws2[$][N], os1[$][N], os2[$][N];
  int t_in_ws = -1, t_out1 = -1, t_out2 = -1, oscnt1 = 0, oscnt2 = 0;
  logic signed [31:0] tmp[N];
  always @(posedge clk) begin
    if (k1.valid && k1.df == DF_WS) begin tmp = ob1; ws1.push_back(tmp); if (t_out1 < 0) t_out1 = cyc; end
    if (k2.valid && k2.df == DF_WS) begin tmp = ob2; ws2.push_back(tmp); if (t_out2 < 0) t_out2 = cyc; end
    if (k1.load && k1.df == DF_OS) begin if (oscnt1 >= N) begin tmp = od1; os1.push_back(tmp); end oscnt1++; end
    if (k2.load && k2.df == DF_OS) begin if (oscnt2 >= N) begin tmp = od2; os2.push_back(tmp); end oscnt2++; end
  end

  task automatic wave(bit v, bit l, dataflow_t df);
    in_ctrl = '{valid: v, load: l, df: df};
    @(posedge clk);
    #1;
  endtask

  logic signed [7:0] A[N][N], B[N][N];
  logic signed [31:0] exp;
  initial begin
    for (int i = 0; i < N; i++) begin in_a[i] = 0; in_b[i] = 0; in_d[i] = 0; end
    in_ctrl = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        A[i][j] = 8'($urandom); B[i][j] = 8'($urandom);
      end
      ws1.delete(); ws2.delete(); os1.delete(); os2.delete();
      oscnt1 = 0; oscnt2 = 0; t_out1 = -1; t_out2 = -1;
      // WS
      for (int s = 0; s < N; s++) begin
        for (int j = 0; j < N; j++) in_d[j] = 32'(B[N-1-s][j]);
        wave(0, 1, DF_WS);
      end
      for (int j = 0; j < N; j++) in_d[j] = 0;
      t_in_ws = cyc;
      for (int r = 0; r < N; r++) begin
        for (int i = 0; i < N; i++) in_a[i] = A[r][i];
        wave(1, 0, DF_WS);
      end
      for (int i = 0; i < N; i++) in_a[i] = 0;
      // OS
      for (int s = 0; s < N; s++) wave(0, 1, DF_OS);
      for (int k = 0; k < N; k++) begin
        for (int i = 0; i < N; i++) in_a[i] = A[i][k];
        for (int j = 0; j < N; j++) in_b[j] = 32'(B[k][j]);
        wave(1, 0, DF_OS);
      end
      for (int i = 0; i < N; i++) begin in_a[i] = 0; in_b[i] = 0; end
      for (int s = 0; s < N; s++) wave(0, 1, DF_OS);
      wave(0, 0, DF_OS);
      repeat (12) @(posedge clk);
      #1;
      check(ws1.size() == N && ws2.size() == N && os1.size() == N && os2.size() == N, "result counts");
      check(t_out1 - t_in_ws == 6, $sformatf("systolic latency %0d", t_out1 - t_in_ws));
      check(t_out2 - t_in_ws == 2, $sformatf("tiled latency %0d", t_out2 - t_in_ws));
      for (int r = 0; r < N && ws1.size() == N && os1.size() == N && ws2.size() == N && os2.size() == N; r++)
        for (int j = 0; j < N; j++) begin
          exp = 0;
          for (int k = 0; k < N; k++) exp += A[r][k] * B[k][j];
          check(ws1[r][j] == exp, $sformatf("WS 1x1 C[%0d][%0d] %0d exp %0d", r, j, ws1[r][j], exp));
          check(ws2[r][j] == exp, $sformatf("WS 2x2 C[%0d][%0d] %0d exp %0d", r, j, ws2[r][j], exp));
          check(os1[N-1-r][j] == exp, $sformatf("OS 1x1 C[%0d][%0d] %0d exp %0d", r, j, os1[N-1-r][j], exp));
          check(os2[N-1-r][j] == exp, $sformatf("OS 2x2 C[%0d][%0d] %0d exp %0d", r, j, os2[N-1-r][j], exp));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
