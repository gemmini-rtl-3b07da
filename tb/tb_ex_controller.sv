// tb_ex_controller: the execute controller at DIM 4 driving a real 4x4
// spatial array, transposer, im2col address generator, 4 KB scratchpad and
// 1 KB accumulator. Operands are written straight into the scratchpad and
// results read straight out of the accumulator.
// Programs:
//   1. weight-stationary C = A*B, then C += A2*B2 (accumulate)
//   2. output-stationary C = A*B, then C += A2*B2
//   3. a 2x2 convolution, stride 1, over a 5x5 image of 4 channels, output
//      pixels 0..3 and 4..7 of the 4x4 output, as four accumulating
//      computes (one per kernel offset) with im2col enabled
// 20 random repetitions of each. The latency of every compute (command
// accepted to done) must be 2*DIM+LAT+3 for WS and 3*DIM+LAT+3 for OS,
// LAT = 2*DIM-2 being the array's pipeline depth.
module tb_ex_controller;
  import gemmini_pkg::*;
  localparam int D = 4, SP_AW = 10, ACC_AW = 6, LAT = 2 * D - 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  rocc_cmd_t cmd;
  logic sp_rd_valid, sp_rd_resp_valid;
  logic [SP_AW-1:0] sp_rd_addr;
  logic [D*8-1:0] sp_rd_data;
  logic acc_wr_valid, acc_wr_accum, sp_wr_valid;
  logic [SP_AW-1:0] sp_wr_addr;
  logic [D*8-1:0] sp_wr_data;
  logic [ACC_AW-1:0] acc_wr_addr;
  logic [D*32-1:0] acc_wr_data;
  logic signed [7:0]  m_in_a [D];
  logic signed [31:0] m_in_b [D], m_in_d [D], m_out_b [D], m_out_d [D];
  pe_ctrl_t m_in_ctrl, m_out_ctrl;
  logic tr_wr_en;
  logic [1:0] tr_wr_idx, tr_rd_idx;
  logic [D*8-1:0] tr_wr_row, tr_rd_col;
  logic i2c_start, i2c_step;
  logic [31:0] i2c_base, i2c_addr;
  im2col_cfg_t i2c_cfg;
  logic [15:0] i2c_oh0, i2c_ow0;

  ex_controller #(.DIM(D), .SP_AW(SP_AW), .ACC_AW(ACC_AW)) dut (.*);
  mesh #(.MESH_ROWS(D), .MESH_COLS(D), .TILE_ROWS(1), .TILE_COLS(1)) u_mesh (
    .clk, .rst_n, .in_a(m_in_a), .in_b(m_in_b), .in_d(m_in_d), .in_ctrl(m_in_ctrl),
    .out_b(m_out_b), .out_d(m_out_d), .out_ctrl(m_out_ctrl));
  transposer #(.DIM(D)) u_tr (.clk, .wr_en(tr_wr_en), .wr_idx(tr_wr_idx), .wr_row(tr_wr_row),
    .rd_idx(tr_rd_idx), .rd_col(tr_rd_col));
  im2col u_i2c (.clk, .rst_n, .start(i2c_start), .base(i2c_base), .cfg(i2c_cfg),
    .oh0(i2c_oh0), .ow0(i2c_ow0), .step(i2c_step), .addr(i2c_addr));

  logic wr_valid, acc_rd_valid, acc_rd_resp_valid, ex_unused_resp, unused_rdy, unused_conf, unused_wrdy;
  logic [SP_AW-1:0] wr_addr, dma_rd_addr;
  logic dma_rd_valid;
  logic [D*8-1:0] wr_data, unused_dma_data;
  logic [ACC_AW-1:0] acc_rd_addr;
  logic [D*32-1:0] acc_rd_data;
  scratchpad #(.DIM(D), .SP_KB(4), .SP_BANKS(4)) u_sp (
    .clk, .rst_n, .ex_rd_valid(sp_rd_valid), .ex_rd_addr(sp_rd_addr),
    .ex_rd_resp_valid(sp_rd_resp_valid), .ex_rd_data(sp_rd_data),
    .ex_wr_valid(sp_wr_valid), .ex_wr_addr(sp_wr_addr), .ex_wr_data(sp_wr_data),
    .dma_rd_valid(dma_rd_valid), .dma_rd_ready(unused_rdy), .dma_rd_addr(dma_rd_addr),
    .dma_rd_resp_valid(ex_unused_resp), .dma_rd_data(unused_dma_data),
    .dma_wr_valid(wr_valid), .dma_wr_ready(unused_wrdy), .dma_wr_addr(wr_addr), .dma_wr_data(wr_data),
    .dma_conflict(unused_conf));
  accumulator #(.DIM(D), .ACC_KB(1)) u_acc (
    .clk, .rst_n, .ex_wr_valid(acc_wr_valid), .ex_wr_addr(acc_wr_addr), .ex_wr_accum(acc_wr_accum),
    .ex_wr_data(acc_wr_data), .dma_wr_valid(1'b0), .dma_wr_ready(), .dma_wr_addr('0),
    .dma_wr_accum(1'b0), .dma_wr_data('0), .rd_valid(acc_rd_valid), .rd_addr(acc_rd_addr),
    .rd_resp_valid(acc_rd_resp_valid), .rd_data(acc_rd_data));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, t_acc = 0, t_lat = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd_valid && cmd_ready) t_acc = cyc;
    if (done) t_lat = cyc - t_acc;
  end

  task automatic send(logic [6:0] f, logic [63:0] rs1, logic [63:0] rs2);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{funct: f, rs1: rs1, rs2: rs2};
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
    while (!done) @(posedge clk);
    @(negedge clk);
  endtask
  task automatic sp_write(int a, logic signed [7:0] v [D]);
    @(negedge clk);
    wr_valid = 1; wr_addr = SP_AW'(a);
    for (int i = 0; i < D; i++) wr_data[i*8 +: 8] = v[i];
    @(negedge clk);
    wr_valid = 0;
  endtask
  task automatic acc_read(int a, output logic signed [31:0] v [D]);
    @(negedge clk);
    acc_rd_valid = 1; acc_rd_addr = ACC_AW'(a);
    @(negedge clk);
    acc_rd_valid = 0;
    for (int i = 0; i < D; i++) v[i] = acc_rd_data[i*32 +: 32];
  endtask

  task automatic sp_read(int a, output logic signed [7:0] v [D]);
    @(negedge clk);
    dma_rd_valid = 1; dma_rd_addr = SP_AW'(a);
    @(negedge clk);
    dma_rd_valid = 0;
    for (int i = 0; i < D; i++) v[i] = unused_dma_data[i*8 +: 8];
  endtask
  function automatic logic signed [7:0] post(logic signed [31:0] x, int sh, int act);
    longint r;
    r = (sh == 0) ? longint'(x) : ((longint'(x) + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    if (act != 0 && r < 0) r = 0;
    if (act == 2 && r > 6) r = 6;
    return 8'(r);
  endfunction

  logic signed [7:0]  a [D][D], b [D][D], a2 [D][D], b2 [D][D], row [D];
  logic signed [31:0] c [D][D], got [D];
  logic signed [7:0]  img [25][D], w [4][D][D];
  int oh, ow, pix;

  task automatic rand_mats();
    for (int r = 0; r < D; r++)
      for (int k = 0; k < D; k++) begin
        a[r][k] = 8'($urandom); b[r][k] = 8'($urandom);
        a2[r][k] = 8'($urandom); b2[r][k] = 8'($urandom);
      end
    for (int r = 0; r < D; r++) begin
      for (int k = 0; k < D; k++) row[k] = a[r][k];  sp_write(0 + r, row);
      for (int k = 0; k < D; k++) row[k] = b[r][k];  sp_write(300 + r, row);
      for (int k = 0; k < D; k++) row[k] = a2[r][k]; sp_write(600 + r, row);
      for (int k = 0; k < D; k++) row[k] = b2[r][k]; sp_write(900 + r, row);
    end
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++) begin
        c[i][j] = 0;
        for (int k = 0; k < D; k++) c[i][j] += 32'(a[i][k]) * 32'(b[k][j]) + 32'(a2[i][k]) * 32'(b2[k][j]);
      end
  endtask
  task automatic check_c(int base, string tag);
    for (int i = 0; i < D; i++) begin
      acc_read(base + i, got);
      for (int j = 0; j < D; j++)
        check(got[j] == c[i][j], $sformatf("%s C[%0d][%0d] got %0d exp %0d", tag, i, j, got[j], c[i][j]));
    end
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; wr_valid = 0; wr_addr = '0; wr_data = '0;
    acc_rd_valid = 0; acc_rd_addr = '0; dma_rd_valid = 0; dma_rd_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      // 1. weight-stationary
      rand_mats();
      send(F_CONFIG, 64'({1'b1, 2'(CFG_EX)}), 64'd0);
      send(F_COMPUTE, {32'd300, 32'd0}, 64'(32'h8000_0008));
      check(t_lat == 2 * D + LAT + 3, $sformatf("WS latency %0d", t_lat));
      send(F_COMPUTE, {32'd900, 32'd600}, 64'(32'hC000_0008));
      check_c(8, "WS");
      // 2. output-stationary
      rand_mats();
      send(F_CONFIG, 64'({1'b0, 2'(CFG_EX)}), 64'd0);
      send(F_COMPUTE, {32'd300, 32'd0}, 64'(32'h8000_0010));
      check(t_lat == 3 * D + LAT + 3, $sformatf("OS latency %0d", t_lat));
      send(F_COMPUTE, {32'd900, 32'd600}, 64'(32'hC000_0010));
      check_c(16, "OS");
    end
    // 2b. results sent to the scratchpad: shift, saturate, activation
    for (int t = 0; t < 20; t++) begin
      int sh, act, df;
      sh = $urandom_range(0, 12); act = $urandom_range(0, 2); df = $urandom_range(0, 1);
      rand_mats();
      for (int i = 0; i < D; i++)
        for (int j = 0; j < D; j++) begin
          c[i][j] = 0;
          for (int k = 0; k < D; k++) c[i][j] += 32'(a[i][k]) * 32'(b[k][j]);
        end
      send(F_CONFIG, 64'({6'(sh), 2'(act), 1'(df), 2'(CFG_EX)}), 64'd0);
      send(F_COMPUTE, {32'd300, 32'd0}, 64'(32'd500));
      check(t_lat == (df ? 2 : 3) * D + LAT + 3, $sformatf("latency to scratchpad %0d", t_lat));
      for (int i = 0; i < D; i++) begin
        sp_read(500 + i, row);
        for (int j = 0; j < D; j++)
          check(row[j] == post(c[i][j], sh, act), $sformatf("sp dest df %0d C[%0d][%0d] got %0d exp %0d", df, i, j, row[j], post(c[i][j], sh, act)));
      end
    end
    send(F_CONFIG, 64'({1'b1, 2'(CFG_EX)}), 64'd0);
    // 3. im2col convolution: 5x5x4 image at rows 100.., weights per offset
    for (int t = 0; t < 10; t++) begin
      for (int p = 0; p < 25; p++) begin
        for (int k = 0; k < D; k++) img[p][k] = 8'($urandom);
        sp_write(100 + p, img[p]);
      end
      for (int o = 0; o < 4; o++)
        for (int r = 0; r < D; r++) begin
          for (int k = 0; k < D; k++) w[o][r][k] = 8'($urandom);
          sp_write(200 + 4 * o + r, w[o][r]);
        end
      for (int df = 0; df < 2; df++) begin
        send(F_CONFIG, 64'({1'(df), 2'(CFG_EX)}), 64'd0);
        for (int blk = 0; blk < 2; blk++) begin
          for (int o = 0; o < 4; o++) begin
            send(F_CONFIG, 64'({1'b1, 2'(CFG_IM2COL)}),
                 {8'd0, 8'(o % 2), 8'(o / 2), 8'd1, 16'd4, 16'd5});
            send(F_COMPUTE, {32'(200 + 4 * o), 32'd100},
                 {16'd0, 16'(blk), (o == 0) ? (32'h8000_0000 | 32'(32 + 4 * blk)) : (32'hC000_0000 | 32'(32 + 4 * blk))});
          end
        end
        send(F_CONFIG, 64'({1'b0, 2'(CFG_IM2COL)}), 64'd0);
        for (int p = 0; p < 8; p++) begin
          oh = p / 4; ow = p % 4;
          for (int j = 0; j < D; j++) begin
            c[p % 4][j] = 0;
            for (int o = 0; o < 4; o++) begin
              pix = (oh + o / 2) * 5 + ow + o % 2;
              for (int k = 0; k < D; k++) c[p % 4][j] += 32'(img[pix][k]) * 32'(w[o][k][j]);
            end
          end
          if (p % 4 == 3) check_c(32 + 4 * (p / 4), df ? "conv WS" : "conv OS");
        end
      end
    end
    send(F_CONFIG, 64'({1'b1, 2'(CFG_EX)}), 64'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
