// tb_gemmini: end-to-end test of the accelerator at its default size
// (16x16 array, 256 KB scratchpad, 64 KB accumulator, 4-entry TLB).
//
// The testbench plays the host: it issues commands, answers page-table walks
// (a fixed virtual-to-physical page mapping, a few cycles late) and serves
// memory requests from a sparse memory with random back-pressure and latency.
// Programs run:
//   1. weight-stationary C = A*B, stored through a rounding shift
//   2. output-stationary C = D + A*B (accumulate onto a loaded bias), ReLU
//   3. a 3x3 convolution over a 6x6x16 image with on-the-fly im2col
//      (9 accumulating computes), stored with ReLU6 and 2-row max pooling
//   4. a matrix loaded with a 4 KiB row stride (one page per row: TLB misses,
//      evictions and hits) and stored back from the scratchpad
//   5. an output-stationary C = A*B sent straight to the scratchpad (rounding
//      shift, ReLU) and stored from there once the compute has finished
// Every result is compared with a reference computed here. The cycle count of
// one WS and one OS compute is checked against 2*DIM+LAT+3 and 3*DIM+LAT+3,
// LAT = 2*DIM-2 being the array's pipeline depth. Each mechanism (both
// dataflows, im2col, accumulate, results sent to the scratchpad, pooling,
// ReLU/ReLU6, saturation, TLB filter hits / hits / misses, dependency
// stalls, scratchpad bank conflicts, memory back-pressure) is counted and
// must occur at least once.
module tb_gemmini;
  import gemmini_pkg::*;

  localparam int D   = 16;
  localparam int LAT = 2 * D - 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               cmd_valid, cmd_ready, busy;
  rocc_cmd_t          cmd;
  logic               ptw_req_valid, ptw_req_ready, ptw_resp_valid;
  logic [VPN_W-1:0]   ptw_req_vpn;
  logic [PPN_W-1:0]   ptw_resp_ppn;
  logic               mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [PADDR_W-1:0] mem_req_addr;
  logic [127:0]       mem_req_data, mem_resp_data;
  logic [31:0]        n_fh, n_th, n_tm, n_ds, n_spc;

  gemmini dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .ptw_req_valid, .ptw_req_ready, .ptw_req_vpn, .ptw_resp_valid, .ptw_resp_ppn,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_data,
    .mem_resp_valid, .mem_resp_data,
    .n_tlb_filter_hits(n_fh), .n_tlb_hits(n_th), .n_tlb_misses(n_tm),
    .n_dep_stalls(n_ds), .n_sp_conflicts(n_spc)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- page table and memory ----------------
  function automatic logic [PPN_W-1:0] ppn_of(logic [VPN_W-1:0] vpn);
    return PPN_W'(vpn * 7 + 3);
  endfunction
  function automatic logic [31:0] pa(logic [38:0] va);
    return {ppn_of(va[38:12]), va[11:0]};
  endfunction

  logic [127:0] mem [logic [31:0]];
  function automatic logic signed [7:0] mem_b(logic [38:0] va);
    logic [31:0] p = pa(va);
    logic [127:0] line = mem.exists(p >> 4) ? mem[p >> 4] : '0;
    return line[(p[3:0])*8 +: 8];
  endfunction
  function automatic void mem_put_row(logic [38:0] va, logic signed [7:0] v [D]);
    logic [127:0] line;
    for (int i = 0; i < D; i++) line[i*8 +: 8] = v[i];
    mem[pa(va) >> 4] = line;
  endfunction

  // PTW: answers a few cycles after the request
  int ptw_lat = 0, n_ptw = 0;
  logic [VPN_W-1:0] ptw_vpn_q;
  assign ptw_req_ready = (ptw_lat == 0);
  always_ff @(posedge clk) begin
    ptw_resp_valid <= 1'b0;
    if (ptw_req_valid && ptw_req_ready) begin
      ptw_lat   <= 5;
      ptw_vpn_q <= ptw_req_vpn;
      n_ptw++;
    end else if (ptw_lat > 1) ptw_lat <= ptw_lat - 1;
    else if (ptw_lat == 1) begin
      ptw_lat        <= 0;
      ptw_resp_valid <= 1'b1;
      ptw_resp_ppn   <= ppn_of(ptw_vpn_q);
    end
  end

  // memory: random ready, response 2..4 cycles later
  int mem_lat = 0, n_mem_bp = 0;
  logic [127:0] mem_rdata_q;
  logic mem_busy = 0;
  always_ff @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_req_ready  <= !mem_busy && ($urandom_range(0, 3) != 0);
    if (mem_req_valid && !mem_req_ready) n_mem_bp++;
    if (mem_req_valid && mem_req_ready && !mem_busy) begin
      mem_busy <= 1'b1;
      mem_req_ready <= 1'b0;
      mem_lat  <= $urandom_range(2, 4);
      if (mem_req_write) mem[mem_req_addr >> 4] = mem_req_data;
      mem_rdata_q <= mem.exists(mem_req_addr >> 4) ? mem[mem_req_addr >> 4] : '0;
    end else if (mem_busy) begin
      if (mem_lat > 1) mem_lat <= mem_lat - 1;
      else begin
        mem_busy       <= 1'b0;
        mem_resp_valid <= 1'b1;
        mem_resp_data  <= mem_rdata_q;
      end
    end
  end

  // ---------------- command helpers ----------------
  task automatic send(logic [6:0] f, logic [63:0] rs1, logic [63:0] rs2);
    // drive between clock edges; cmd_ready depends only on registered state
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd       = '{funct: f, rs1: rs1, rs2: rs2};
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
  endtask
  task automatic mvin(logic [38:0] va, logic [31:0] la, int rows);
    send(F_MVIN, 64'(va), {16'd0, 16'(rows), la});
  endtask
  task automatic mvout(logic [38:0] va, logic [31:0] la, int rows);
    send(F_MVOUT, 64'(va), {16'd0, 16'(rows), la});
  endtask
  task automatic cfg_ld(int stride);
    send(F_CONFIG, 64'(CFG_LD), {32'(stride), 32'd0});
  endtask
  task automatic cfg_st(int stride, int scale, int shift, act_t act, int pool, int r6);
    send(F_CONFIG, 64'({12'd0, 4'(r6), 3'd0, 3'(pool), 6'(shift), 2'(act), 2'(CFG_ST)}),
         {32'(stride), 16'd0, 16'(scale)});
  endtask
  task automatic cfg_ex(dataflow_t df);
    send(F_CONFIG, 64'({df, 2'(CFG_EX)}), 64'd0);
  endtask
  task automatic cfg_i2c(bit en, int in_w, int out_w, int stride, int kh, int kw);
    send(F_CONFIG, 64'({en, 2'(CFG_IM2COL)}),
         {8'd0, 8'(kw), 8'(kh), 8'(stride), 16'(out_w), 16'(in_w)});
  endtask
  task automatic compute(int a, int b, logic [31:0] c, int oh0 = 0, int ow0 = 0);
    send(F_COMPUTE, {32'(b), 32'(a)}, {16'(ow0), 16'(oh0), c});
  endtask
  task automatic wait_idle();
    @(posedge clk);
    while (busy || cmd_valid) @(posedge clk);
  endtask

  // ---------------- reference arithmetic ----------------
  function automatic logic signed [7:0] sat_shift(longint x, int sh);
    longint y = (sh == 0) ? x : ((x + (longint'(1) << (sh - 1))) >>> sh);
    if (y > 127) return 8'sd127;
    if (y < -128) return -8'sd128;
    return 8'(y);
  endfunction

  logic signed [7:0] A [D][D], B [D][D], Dm [D][D];
  logic signed [7:0] img [36][D];      // 6x6 pixels x 16 channels
  logic signed [7:0] W [9][D][D];      // 3x3 kernel offsets
  logic signed [7:0] row [D];

  // mechanism counters
  int n_ws = 0, n_os = 0, n_i2c = 0, n_accum = 0, n_pool = 0, n_relu_clip = 0, n_sat = 0, n_sp_dest = 0;
  always_ff @(posedge clk) begin
    if (dut.u_ex.i2c_step && dut.u_ex.i2c.en) n_i2c++;
    if (dut.u_acc.wr_en && dut.u_acc.wr_accum) n_accum++;
    if (dut.u_ex.sp_wr_valid) n_sp_dest++;
    if (dut.u_dma.u_pool.out_valid && dut.u_dma.pool > 1) n_pool++;
  end

  // compute cycle measurement
  int t_acc = 0, t_ws = -1, t_os = -1, cyc = 0;
  bit in_compute = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_ex.cmd_ready && dut.u_ex.cmd_valid && dut.u_ex.cmd.funct == F_COMPUTE) begin
      t_acc      <= cyc;
      in_compute <= 1;
    end
    if (dut.u_ex.done && in_compute) begin
      in_compute <= 0;
      if (dut.u_ex.df == DF_WS) n_ws++; else n_os++;
      if (t_ws < 0 && dut.u_ex.df == DF_WS) t_ws <= cyc - t_acc;
      if (t_os < 0 && dut.u_ex.df == DF_OS) t_os <= cyc - t_acc;
    end
  end

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc;
    logic signed [7:0] got, exp;
    cmd_valid = 0;
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++) begin
        A[i][j]  = 8'($urandom_range(0, 15)) - 8'sd8;
        B[i][j]  = 8'($urandom_range(0, 15)) - 8'sd8;
        Dm[i][j] = 8'($urandom_range(0, 255));
      end
    for (int i = 0; i < D; i++) begin
      for (int j = 0; j < D; j++) row[j] = A[i][j];
      mem_put_row(39'h10000 + 39'(i*16), row);
      for (int j = 0; j < D; j++) row[j] = B[i][j];
      mem_put_row(39'h20000 + 39'(i*16), row);
      for (int j = 0; j < D; j++) row[j] = Dm[i][j];
      mem_put_row(39'h21000 + 39'(i*16), row);
    end

    // ---------- 1. weight-stationary ----------
    cfg_ld(16);
    mvin(39'h10000, 32'd0, D);          // A -> sp rows 0..15
    mvin(39'h20000, 32'd16, D);         // B -> sp rows 16..31
    cfg_ex(DF_WS);
    compute(0, 16, 32'h8000_0000);      // acc rows 0..15
    mvout(39'h30000, 32'd40, D);        // sp rows 40..55 back out (runs beside the compute)
    cfg_st(16, 1, 1, ACT_NONE, 1, 0);
    mvout(39'h31000, 32'h8000_0000, D);
    wait_idle();
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++) begin
        acc = 0;
        for (int k = 0; k < D; k++) acc += A[i][k] * B[k][j];
        exp = sat_shift(acc, 1);
        if (exp == 127 || exp == -128) n_sat++;
        got = mem_b(39'h31000 + 39'(i*16 + j));
        check(got == exp, $sformatf("WS C[%0d][%0d] got %0d exp %0d", i, j, got, exp));
      end
    check(t_ws == 2*D + LAT + 3, $sformatf("WS compute took %0d cycles, expected %0d", t_ws, 2*D+LAT+3));

    // ---------- 2. output-stationary with bias and ReLU ----------
    mvin(39'h21000, 32'h8000_0010, D);  // bias -> acc rows 16..31 (sign-extended)
    cfg_ex(DF_OS);
    compute(0, 16, 32'hC000_0010);      // accumulate onto acc rows 16..31
    cfg_st(16, 1, 2, ACT_RELU, 1, 0);
    mvout(39'h32000, 32'h8000_0010, D);
    wait_idle();
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++) begin
        acc = Dm[i][j];
        for (int k = 0; k < D; k++) acc += A[i][k] * B[k][j];
        exp = sat_shift(acc, 2);
        if (exp < 0) begin exp = 0; n_relu_clip++; end
        got = mem_b(39'h32000 + 39'(i*16 + j));
        check(got == exp, $sformatf("OS C[%0d][%0d] got %0d exp %0d", i, j, got, exp));
      end
    check(t_os == 3*D + LAT + 3, $sformatf("OS compute took %0d cycles, expected %0d", t_os, 3*D+LAT+3));

    // ---------- 3. 3x3 convolution with im2col, ReLU6, pooling ----------
    for (int p = 0; p < 36; p++) begin
      for (int c = 0; c < D; c++) begin
        img[p][c] = 8'($urandom_range(0, 7)) - 8'sd3;
        row[c] = img[p][c];
      end
      mem_put_row(39'h40000 + 39'(p*16), row);
    end
    for (int o = 0; o < 9; o++)
      for (int ci = 0; ci < D; ci++) begin
        for (int co = 0; co < D; co++) begin
          W[o][ci][co] = 8'($urandom_range(0, 3)) - 8'sd1;
          row[co] = W[o][ci][co];
        end
        mem_put_row(39'h50000 + 39'((o*D + ci)*16), row);
      end
    mvin(39'h40000, 32'd64, 36);        // image -> sp rows 64..99
    mvin(39'h50000, 32'd128, 9*D);      // weights -> sp rows 128..271
    cfg_ex(DF_WS);
    for (int o = 0; o < 9; o++) begin
      cfg_i2c(1, 6, 4, 1, o / 3, o % 3);
      compute(64, 128 + o*D, (o == 0) ? 32'h8000_0020 : 32'hC000_0020);
    end
    cfg_i2c(0, 0, 0, 0, 0, 0);
    cfg_st(16, 1, 4, ACT_RELU6, 2, 2); // ReLU6 bound 6<<2 = 24, pool 2 rows
    mvout(39'h60000, 32'h8000_0020, D);
    wait_idle();
    for (int q = 0; q < D/2; q++)
      for (int co = 0; co < D; co++) begin
        logic signed [7:0] best;
        for (int s = 0; s < 2; s++) begin
          int p, oh, ow;
          logic signed [7:0] v;
          p  = 2*q + s;
          oh = p / 4;
          ow = p % 4;
          acc = 0;
          for (int o = 0; o < 9; o++)
            for (int ci = 0; ci < D; ci++)
              acc += img[(oh + o/3)*6 + ow + o%3][ci] * W[o][ci][co];
          v = sat_shift(acc, 4);
          if (v < 0) v = 0;
          if (v > 24) begin v = 24; n_relu_clip++; end
          if (s == 0 || v > best) best = v;
        end
        got = mem_b(39'h60000 + 39'(q*16 + co));
        check(got == best, $sformatf("conv pooled[%0d][%0d] got %0d exp %0d", q, co, got, best));
      end

    // ---------- 4. one page per row: TLB misses, evictions, hits ----------
    for (int i = 0; i < 8; i++) begin
      for (int j = 0; j < D; j++) row[j] = 8'(i * 16 + j);
      mem_put_row(39'h100000 + 39'(i * 4096), row);
    end
    cfg_ld(4096);
    mvin(39'h100000, 32'd300, 8);
    mvin(39'h100000, 32'd308, 2);       // rows 0,1 again: hits only if still in the TLB
    mvin(39'h106000, 32'd310, 2);       // rows 6,7: recent pages, TLB hits
    cfg_st(16, 1, 0, ACT_NONE, 1, 0);
    mvout(39'h70000, 32'd300, 12);
    wait_idle();
    for (int i = 0; i < 12; i++)
      for (int j = 0; j < D; j++) begin
        int src;
        src = (i < 8) ? i : (i < 10) ? i - 8 : i - 4;
        got = mem_b(39'h70000 + 39'(i*16 + j));
        check(got == 8'(src * 16 + j), $sformatf("strided row %0d el %0d got %0d", i, j, got));
      end

    // ---------- 5. results sent to the scratchpad (OS, shift 2, ReLU), stored from there ----------
    send(F_CONFIG, 64'({6'd2, 2'(ACT_RELU), 1'(DF_OS), 2'(CFG_EX)}), 64'd0);
    compute(0, 16, 32'd400);            // sp rows 400..415
    cfg_st(16, 1, 0, ACT_NONE, 1, 0);
    mvout(39'h80000, 32'd400, D);       // must wait for the compute (read after write)
    wait_idle();
    for (int i = 0; i < D; i++)
      for (int j = 0; j < D; j++) begin
        acc = 0;
        for (int k = 0; k < D; k++) acc += A[i][k] * B[k][j];
        exp = sat_shift(acc, 2);
        if (exp < 0) exp = 0;
        got = mem_b(39'h80000 + 39'(i*16 + j));
        check(got == exp, $sformatf("scratchpad result [%0d][%0d] got %0d exp %0d", i, j, got, exp));
      end
    cfg_ex(DF_WS);

    // ---------- mechanism coverage ----------
    $display("mechanisms: ws=%0d os=%0d im2col_rows=%0d accum_writes=%0d sp_result_rows=%0d pooled_rows=%0d relu_clips=%0d sat=%0d",
             n_ws, n_os, n_i2c, n_accum, n_sp_dest, n_pool, n_relu_clip, n_sat);
    $display("mechanisms: tlb_filter_hits=%0d tlb_hits=%0d tlb_misses=%0d ptw=%0d dep_stalls=%0d sp_conflicts=%0d mem_backpressure=%0d",
             n_fh, n_th, n_tm, n_ptw, n_ds, n_spc, n_mem_bp);
    check(n_ws > 0, "no WS compute");
    check(n_os > 0, "no OS compute");
    check(n_i2c > 0, "no im2col");
    check(n_accum > 0, "no accumulate");
    check(n_sp_dest > 0, "no result row sent to the scratchpad");
    check(n_pool > 0, "no pooling");
    check(n_relu_clip > 0, "no ReLU clipping");
    check(n_sat > 0, "no saturation");
    check(n_fh > 0, "no TLB filter hit");
    check(n_th > 0, "no TLB hit");
    check(n_tm > 0, "no TLB miss");
    check(n_ptw == n_tm, "PTW requests differ from misses");
    check(n_ds > 0, "no dependency stall");
    check(n_spc > 0, "no scratchpad bank conflict");
    check(n_mem_bp > 0, "no memory back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
