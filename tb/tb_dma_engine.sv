// tb_dma_engine: the DMA engine at DIM 4 with a real 4 KB scratchpad, a real
// 1 KB accumulator and a real local TLB, against a page-table-walker model
// and a memory with random back-pressure and 2..4 cycle latency.
// The execute-side ports are driven randomly (scratchpad reads, accumulator
// writes to rows the DMA never touches) so that bank conflicts and
// accumulator write back-pressure happen during the transfers.
// Programs:
//   1. load 8 rows (64-byte stride) into the scratchpad, store them back with
//      a 4 KiB stride (one page per row: TLB misses and evictions)
//   2. load 8 rows into the accumulator, accumulate 8 more rows on top, store
//      with scale, rounding shift, ReLU and 2-row max pooling (4 rows out)
//   3. store the same accumulator rows with ReLU6 (shift 1) and no pooling
//   4. flush the TLB and store again (misses must reappear)
// Memory contents after every store are compared with a model, and done must
// pulse once per command.
module tb_dma_engine;
  import gemmini_pkg::*;
  localparam int D = 4, SP_AW = 10, ACC_AW = 6, RW = D * 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  rocc_cmd_t cmd;
  logic tlb_req_valid, tlb_req_write, tlb_resp_valid, tlb_flush;
  logic [VPN_W-1:0] tlb_req_vpn;
  logic [PPN_W-1:0] tlb_resp_ppn;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [PADDR_W-1:0] mem_req_addr;
  logic [RW-1:0] mem_req_data, mem_resp_data;
  logic sp_rd_valid, sp_rd_ready, sp_rd_resp_valid, sp_wr_valid, sp_wr_ready;
  logic [SP_AW-1:0] sp_rd_addr, sp_wr_addr;
  logic [RW-1:0] sp_rd_data, sp_wr_data;
  logic acc_rd_valid, acc_rd_resp_valid, acc_wr_valid, acc_wr_ready, acc_wr_accum;
  logic [ACC_AW-1:0] acc_rd_addr, acc_wr_addr;
  logic [D*32-1:0] acc_rd_data, acc_wr_data;

  dma_engine #(.DIM(D), .SP_AW(SP_AW), .ACC_AW(ACC_AW)) dut (.*);

  logic ex_rd_valid, ex_rd_resp_valid, sp_conflict;
  logic [SP_AW-1:0] ex_rd_addr;
  logic [RW-1:0] ex_rd_data;
  scratchpad #(.DIM(D), .SP_KB(4), .SP_BANKS(4)) u_sp (
    .clk, .rst_n, .ex_rd_valid, .ex_rd_addr, .ex_rd_resp_valid, .ex_rd_data,
    .dma_rd_valid(sp_rd_valid), .dma_rd_ready(sp_rd_ready), .dma_rd_addr(sp_rd_addr),
    .dma_rd_resp_valid(sp_rd_resp_valid), .dma_rd_data(sp_rd_data),
    .ex_wr_valid(1'b0), .ex_wr_addr('0), .ex_wr_data('0),
    .dma_wr_valid(sp_wr_valid), .dma_wr_ready(sp_wr_ready), .dma_wr_addr(sp_wr_addr),
    .dma_wr_data(sp_wr_data), .dma_conflict(sp_conflict));

  logic ex_wr_valid;
  logic [ACC_AW-1:0] ex_wr_addr;
  accumulator #(.DIM(D), .ACC_KB(1)) u_acc (
    .clk, .rst_n, .ex_wr_valid, .ex_wr_addr, .ex_wr_accum(1'b0), .ex_wr_data('0),
    .dma_wr_valid(acc_wr_valid), .dma_wr_ready(acc_wr_ready), .dma_wr_addr(acc_wr_addr),
    .dma_wr_accum(acc_wr_accum), .dma_wr_data(acc_wr_data),
    .rd_valid(acc_rd_valid), .rd_addr(acc_rd_addr), .rd_resp_valid(acc_rd_resp_valid),
    .rd_data(acc_rd_data));

  logic ptw_req_valid, ptw_req_ready, ptw_resp_valid;
  logic [VPN_W-1:0] ptw_req_vpn;
  logic [PPN_W-1:0] ptw_resp_ppn;
  logic [31:0] n_fh, n_th, n_tm;
  local_tlb u_tlb (
    .clk, .rst_n, .req_valid(tlb_req_valid), .req_vpn(tlb_req_vpn), .req_write(tlb_req_write),
    .resp_valid(tlb_resp_valid), .resp_ppn(tlb_resp_ppn),
    .ptw_req_valid, .ptw_req_ready, .ptw_req_vpn, .ptw_resp_valid, .ptw_resp_ppn,
    .flush(tlb_flush), .n_filter_hits(n_fh), .n_tlb_hits(n_th), .n_misses(n_tm));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PPN_W-1:0] ppn_of(logic [VPN_W-1:0] vpn);
    return PPN_W'(vpn * 3 + 11);
  endfunction
  function automatic logic [31:0] pa(logic [38:0] va);
    return {ppn_of(va[38:12]), va[11:0]};
  endfunction

  // page-table walker
  int ptw_lat = 0;
  logic [VPN_W-1:0] ptw_vpn_q;
  assign ptw_req_ready = (ptw_lat == 0);
  always_ff @(posedge clk) begin
    ptw_resp_valid <= 1'b0;
    if (ptw_req_valid && ptw_req_ready) begin ptw_lat <= 4; ptw_vpn_q <= ptw_req_vpn; end
    else if (ptw_lat > 1) ptw_lat <= ptw_lat - 1;
    else if (ptw_lat == 1) begin ptw_lat <= 0; ptw_resp_valid <= 1'b1; ptw_resp_ppn <= ppn_of(ptw_vpn_q); end
  end

  // memory (one row per physical address), random ready and latency
  logic [RW-1:0] mem [logic [31:0]];
  int mem_lat = 0, n_bp = 0;
  logic [RW-1:0] rdq;
  logic mem_busy = 0;
  always_ff @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_req_ready  <= !mem_busy && ($urandom_range(0, 2) != 0);
    if (mem_req_valid && !mem_req_ready) n_bp++;
    if (mem_req_valid && mem_req_ready && !mem_busy) begin
      mem_busy <= 1'b1; mem_req_ready <= 1'b0; mem_lat <= $urandom_range(2, 4);
      if (mem_req_write) mem[mem_req_addr] = mem_req_data;
      rdq <= mem.exists(mem_req_addr) ? mem[mem_req_addr] : '0;
    end else if (mem_busy) begin
      if (mem_lat > 1) mem_lat <= mem_lat - 1;
      else begin mem_busy <= 1'b0; mem_resp_valid <= 1'b1; mem_resp_data <= rdq; end
    end
  end

  // execute-side traffic
  int n_conf = 0, n_accbp = 0;
  always_ff @(posedge clk) begin
    ex_rd_valid <= 1'($urandom_range(0, 1));
    ex_rd_addr  <= SP_AW'($urandom);
    ex_wr_valid <= ($urandom_range(0, 3) == 0);
    ex_wr_addr  <= ACC_AW'($urandom_range(48, 63));
    if (sp_conflict) n_conf++;
    if (acc_wr_valid && !acc_wr_ready) n_accbp++;
  end

  int n_done = 0;
  always @(posedge clk) if (done) n_done++;

  task automatic send(logic [6:0] f, logic [63:0] rs1, logic [63:0] rs2);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{funct: f, rs1: rs1, rs2: rs2};
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
  endtask
  task automatic wait_idle(int n_expected);
    while (n_done < n_expected) @(posedge clk);
  endtask
  task automatic cfg_ld(int stride);
    send(F_CONFIG, 64'(CFG_LD), {32'(stride), 32'd0});
  endtask
  task automatic cfg_st(int stride, int scale, int shift, act_t act, int pool, int r6);
    send(F_CONFIG, 64'({12'd0, 4'(r6), 3'd0, 3'(pool), 6'(shift), 2'(act), 2'(CFG_ST)}),
         {32'(stride), 16'd0, 16'(scale)});
  endtask

  logic signed [7:0]  a_in [8][D], b_in [8][D];
  logic signed [31:0] accm [8][D];
  logic signed [7:0]  ex;
  longint p, y;
  int bound, nd, miss0;

  function automatic logic signed [7:0] post(logic signed [31:0] x, int scale, int sh, int act, int r6);
    longint q, r;
    q = longint'(x) * scale;
    r = (sh == 0) ? q : ((q + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    if (act != 0 && r < 0) r = 0;
    if (act == 2 && r > ((6 << r6) > 127 ? 127 : (6 << r6))) r = (6 << r6) > 127 ? 127 : (6 << r6);
    return 8'(r);
  endfunction
  function automatic logic [RW-1:0] mrow(logic [38:0] va);
    return mem.exists(pa(va)) ? mem[pa(va)] : '0;
  endfunction

  initial begin
    cmd_valid = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    nd = 0;
    for (int r = 0; r < 8; r++)
      for (int i = 0; i < D; i++) begin
        a_in[r][i] = 8'($urandom);
        b_in[r][i] = 8'($urandom);
        mem[pa(39'h10000 + 64 * r)][i*8 +: 8] = a_in[r][i];
        mem[pa(39'h20000 + 64 * r)][i*8 +: 8] = b_in[r][i];
      end
    // 1. scratchpad round trip
    cfg_ld(64);                                     nd++;
    send(F_MVIN, 64'h10000, {16'd0, 16'd8, 32'd300});  nd++;
    cfg_st(4096, 1, 0, ACT_NONE, 0, 0);             nd++;
    send(F_MVOUT, 64'h100000, {16'd0, 16'd8, 32'd300}); nd++;
    wait_idle(nd);
    for (int r = 0; r < 8; r++)
      for (int i = 0; i < D; i++)
        check($signed(mrow(39'h100000 + 4096 * r)[i*8 +: 8]) == a_in[r][i], $sformatf("sp round trip r%0d e%0d", r, i));
    check(n_tm >= 8, "page-per-row store misses the TLB");
    // 2. accumulator: load, accumulate, store with scale/shift/ReLU/pool 2
    send(F_MVIN, 64'h10000, {16'd0, 16'd8, 32'h8000_0004}); nd++;
    send(F_MVIN, 64'h20000, {16'd0, 16'd8, 32'hC000_0004}); nd++;
    cfg_st(64, 300, 6, ACT_RELU, 2, 0);             nd++;
    send(F_MVOUT, 64'h30000, {16'd0, 16'd8, 32'h8000_0004}); nd++;
    wait_idle(nd);
    for (int r = 0; r < 8; r++)
      for (int i = 0; i < D; i++) accm[r][i] = 32'(a_in[r][i]) + 32'(b_in[r][i]);
    for (int o = 0; o < 4; o++)
      for (int i = 0; i < D; i++) begin
        ex = post(accm[2*o][i], 300, 6, 1, 0);
        if (post(accm[2*o+1][i], 300, 6, 1, 0) > ex) ex = post(accm[2*o+1][i], 300, 6, 1, 0);
        check($signed(mrow(39'h30000 + 64 * o)[i*8 +: 8]) == ex,
              $sformatf("acc pooled r%0d e%0d got %0d exp %0d", o, i, $signed(mrow(39'h30000 + 64 * o)[i*8 +: 8]), ex));
      end
    // 3. ReLU6 with shift 1 (bound 12), no pooling
    cfg_st(64, 1, 0, ACT_RELU6, 1, 1);              nd++;
    send(F_MVOUT, 64'h40000, {16'd0, 16'd8, 32'h8000_0004}); nd++;
    wait_idle(nd);
    for (int r = 0; r < 8; r++)
      for (int i = 0; i < D; i++)
        check($signed(mrow(39'h40000 + 64 * r)[i*8 +: 8]) == post(accm[r][i], 1, 0, 2, 1), $sformatf("relu6 r%0d e%0d", r, i));
    // 4. flush then store again: the first translation must miss
    miss0 = n_tm;
    send(F_FLUSH, 64'd0, 64'd0);                    nd++;
    send(F_MVOUT, 64'h40000, {16'd0, 16'd8, 32'h8000_0004}); nd++;
    wait_idle(nd);
    check(n_tm > miss0, "flush empties the TLB");
    repeat (10) @(posedge clk);
    check(n_done == nd, $sformatf("one done per command (%0d vs %0d)", n_done, nd));
    check(n_conf > 0, "scratchpad bank conflicts happened");
    check(n_accbp > 0, "accumulator write back-pressure happened");
    check(n_bp > 0, "memory back-pressure happened");
    check(n_fh > 0 && n_th + n_tm > 0, "TLB filter hits happened");
    $display("conflicts %0d acc_bp %0d mem_bp %0d filt %0d hit %0d miss %0d", n_conf, n_accbp, n_bp, n_fh, n_th, n_tm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
