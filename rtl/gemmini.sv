// gemmini: the accelerator, as attached to a RISC-V host core.
//
// The host sends custom instructions (RoCC commands: funct, rs1, rs2) on
// cmd_*. Each command is decoded into the unit that runs it (DMA or execute)
// and the local-memory rows it reads and writes, and placed in the
// dependency manager, which issues it as soon as it has no hazard with an
// older, unfinished command. The DMA engine moves rows between memory
// (mem_*, towards the shared L2) and the scratchpad or accumulator,
// translating virtual addresses in the local TLB, which falls back on the
// host's page-table walker (ptw_*). The execute controller multiplies
// scratchpad blocks on the 16x16 spatial array, using the transposer
// (output-stationary A operand) and the im2col address generator, and
// writes results into the accumulator. Stores from the accumulator pass
// through the scalar multiplier, bit shift, ReLU and pooling engine inside
// the DMA engine. busy is high while any command is queued or running.
//
// Command set (this design's own encoding; see ex_controller and dma_engine
// for the fields): CONFIG (funct 0), MVIN (2), MVOUT (3), COMPUTE (4),
// FLUSH (7). Local addresses: bit 31 selects the accumulator, bit 30 asks
// for accumulation, the low bits are the row.
// Performance counters: TLB filter hits, TLB hits, TLB misses, cycles a
// command waited on a hazard, cycles the DMA lost a scratchpad bank to the
// execute controller.
// The block structure is the paper's (Fig. 1 of its architecture overview);
// the interfaces, encoding and sizes not given there are this design's.
module gemmini
  import gemmini_pkg::*;
#(
  parameter int DIM         = gemmini_pkg::DIM,
  parameter int SP_KB       = gemmini_pkg::SP_KB,
  parameter int SP_BANKS    = gemmini_pkg::SP_BANKS,
  parameter int ACC_KB      = gemmini_pkg::ACC_KB,
  parameter int TLB_ENTRIES = 4,
  parameter int TLB_HIT_LAT = 2,
  parameter int RS_ENTRIES  = 8,
  localparam int ROW_W      = DIM * IN_W,
  localparam int SP_ROWS    = SP_KB * 1024 * 8 / ROW_W,
  localparam int ACC_ROWS   = ACC_KB * 1024 * 8 / (DIM * ACC_W),
  localparam int SP_AW      = $clog2(SP_ROWS),
  localparam int ACC_AW     = $clog2(ACC_ROWS),
  localparam int IW         = $clog2(RS_ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // RoCC command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  rocc_cmd_t          cmd,
  output logic               busy,
  // RoCC page-table walker
  output logic               ptw_req_valid,
  input  logic               ptw_req_ready,
  output logic [VPN_W-1:0]   ptw_req_vpn,
  input  logic               ptw_resp_valid,
  input  logic [PPN_W-1:0]   ptw_resp_ppn,
  // memory (towards L2)
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_write,
  output logic [PADDR_W-1:0] mem_req_addr,
  output logic [ROW_W-1:0]   mem_req_data,
  input  logic               mem_resp_valid,
  input  logic [ROW_W-1:0]   mem_resp_data,
  // performance counters
  output logic [31:0]        n_tlb_filter_hits,
  output logic [31:0]        n_tlb_hits,
  output logic [31:0]        n_tlb_misses,
  output logic [31:0]        n_dep_stalls,
  output logic [31:0]        n_sp_conflicts
);
  // ================= command decode =================
  unit_t       d_unit;
  logic [32:0] d_rd_lo, d_rd_hi, d_wr_lo, d_wr_hi;
  logic        im2col_on;     // im2col enable as seen in program order

  function automatic logic [32:0] la_key(logic [31:0] la);
    // accumulate flag does not change which rows are touched
    return {1'b0, la[LA_ACC_BIT], 1'b0, la[29:0]};
  endfunction

  always_comb begin
    logic [32:0] a, b;
    d_unit  = U_DMA;
    d_rd_lo = '0; d_rd_hi = '0; d_wr_lo = '0; d_wr_hi = '0;
    a = la_key(cmd.rs1[31:0]);
    b = la_key(cmd.rs1[63:32]);
    unique case (cmd.funct)
      F_CONFIG: d_unit = (cmd.rs1[1:0] == CFG_EX || cmd.rs1[1:0] == CFG_IM2COL) ? U_EX : U_DMA;
      F_MVIN: begin
        d_wr_lo = la_key(cmd.rs2[31:0]);
        d_wr_hi = d_wr_lo + 33'(cmd.rs2[47:32]);
      end
      F_MVOUT: begin
        d_rd_lo = la_key(cmd.rs2[31:0]);
        d_rd_hi = d_rd_lo + 33'(cmd.rs2[47:32]);
      end
      F_COMPUTE: begin
        d_unit = U_EX;
        if (im2col_on) begin
          d_rd_lo = '0;
          d_rd_hi = 33'(SP_ROWS);
        end else begin
          d_rd_lo = (a < b) ? a : b;
          d_rd_hi = ((a < b) ? b : a) + 33'(DIM);
        end
        d_wr_lo = la_key(cmd.rs2[31:0]);
        d_wr_hi = d_wr_lo + 33'(DIM);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) im2col_on <= 1'b0;
    else if (cmd_valid && cmd_ready && cmd.funct == F_CONFIG && cmd.rs1[1:0] == CFG_IM2COL)
      im2col_on <= cmd.rs1[2];
  end

  // ================= dependency management =================
  logic          iss_valid[2], iss_ready[2], dn_valid[2];
  rocc_cmd_t     iss_cmd[2];
  logic [IW-1:0] iss_id[2], dn_id[2];
  logic          dep_busy;

  dep_mgmt #(.ENTRIES(RS_ENTRIES)) u_dep (
    .clk, .rst_n,
    .alloc_valid(cmd_valid), .alloc_ready(cmd_ready), .alloc_cmd(cmd), .alloc_unit(d_unit),
    .alloc_rd_lo(d_rd_lo), .alloc_rd_hi(d_rd_hi), .alloc_wr_lo(d_wr_lo), .alloc_wr_hi(d_wr_hi),
    .issue_valid(iss_valid), .issue_ready(iss_ready), .issue_cmd(iss_cmd), .issue_id(iss_id),
    .done_valid(dn_valid), .done_id(dn_id), .busy(dep_busy), .n_dep_stalls
  );
  assign busy = dep_busy;

  // id of the command each unit is running
  logic [IW-1:0] run_id[2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_id[0] <= '0;
      run_id[1] <= '0;
    end else begin
      for (int u = 0; u < 2; u++)
        if (iss_valid[u] && iss_ready[u]) run_id[u] <= iss_id[u];
    end
  end
  assign dn_id[0] = run_id[0];
  assign dn_id[1] = run_id[1];

  // ================= local memories =================
  logic                ex_sp_rd_valid, ex_sp_rd_resp_valid;
  logic [SP_AW-1:0]    ex_sp_rd_addr;
  logic [ROW_W-1:0]    ex_sp_rd_data;
  logic                dma_sp_rd_valid, dma_sp_rd_ready, dma_sp_rd_resp_valid;
  logic [SP_AW-1:0]    dma_sp_rd_addr, dma_sp_wr_addr;
  logic [ROW_W-1:0]    dma_sp_rd_data, dma_sp_wr_data;
  logic                dma_sp_wr_valid, dma_sp_wr_ready, sp_conflict;
  logic                ex_sp_wr_valid;
  logic [SP_AW-1:0]    ex_sp_wr_addr;
  logic [ROW_W-1:0]    ex_sp_wr_data;

  scratchpad #(.DIM(DIM), .SP_KB(SP_KB), .SP_BANKS(SP_BANKS)) u_sp (
    .clk, .rst_n,
    .ex_rd_valid(ex_sp_rd_valid), .ex_rd_addr(ex_sp_rd_addr),
    .ex_rd_resp_valid(ex_sp_rd_resp_valid), .ex_rd_data(ex_sp_rd_data),
    .dma_rd_valid(dma_sp_rd_valid), .dma_rd_ready(dma_sp_rd_ready), .dma_rd_addr(dma_sp_rd_addr),
    .dma_rd_resp_valid(dma_sp_rd_resp_valid), .dma_rd_data(dma_sp_rd_data),
    .ex_wr_valid(ex_sp_wr_valid), .ex_wr_addr(ex_sp_wr_addr), .ex_wr_data(ex_sp_wr_data),
    .dma_wr_valid(dma_sp_wr_valid), .dma_wr_ready(dma_sp_wr_ready), .dma_wr_addr(dma_sp_wr_addr),
    .dma_wr_data(dma_sp_wr_data), .dma_conflict(sp_conflict)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) n_sp_conflicts <= '0;
    else if (sp_conflict) n_sp_conflicts <= n_sp_conflicts + 1;
  end

  logic                  ex_acc_wr_valid, ex_acc_wr_accum;
  logic [ACC_AW-1:0]     ex_acc_wr_addr;
  logic [DIM*ACC_W-1:0]  ex_acc_wr_data;
  logic                  dma_acc_wr_valid, dma_acc_wr_ready, dma_acc_wr_accum;
  logic [ACC_AW-1:0]     dma_acc_wr_addr, dma_acc_rd_addr;
  logic [DIM*ACC_W-1:0]  dma_acc_wr_data, dma_acc_rd_data;
  logic                  dma_acc_rd_valid, dma_acc_rd_resp_valid;

  accumulator #(.DIM(DIM), .ACC_KB(ACC_KB)) u_acc (
    .clk, .rst_n,
    .ex_wr_valid(ex_acc_wr_valid), .ex_wr_addr(ex_acc_wr_addr), .ex_wr_accum(ex_acc_wr_accum),
    .ex_wr_data(ex_acc_wr_data),
    .dma_wr_valid(dma_acc_wr_valid), .dma_wr_ready(dma_acc_wr_ready), .dma_wr_addr(dma_acc_wr_addr),
    .dma_wr_accum(dma_acc_wr_accum), .dma_wr_data(dma_acc_wr_data),
    .rd_valid(dma_acc_rd_valid), .rd_addr(dma_acc_rd_addr),
    .rd_resp_valid(dma_acc_rd_resp_valid), .rd_data(dma_acc_rd_data)
  );

  // ================= DMA engine and TLB =================
  logic             tlb_req_valid, tlb_req_write, tlb_resp_valid, tlb_flush;
  logic [VPN_W-1:0] tlb_req_vpn;
  logic [PPN_W-1:0] tlb_resp_ppn;

  dma_engine #(.DIM(DIM), .SP_AW(SP_AW), .ACC_AW(ACC_AW)) u_dma (
    .clk, .rst_n,
    .cmd_valid(iss_valid[U_DMA]), .cmd_ready(iss_ready[U_DMA]), .cmd(iss_cmd[U_DMA]),
    .done(dn_valid[U_DMA]),
    .tlb_req_valid, .tlb_req_vpn, .tlb_req_write, .tlb_resp_valid, .tlb_resp_ppn, .tlb_flush,
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_data,
    .mem_resp_valid, .mem_resp_data,
    .sp_rd_valid(dma_sp_rd_valid), .sp_rd_ready(dma_sp_rd_ready), .sp_rd_addr(dma_sp_rd_addr),
    .sp_rd_resp_valid(dma_sp_rd_resp_valid), .sp_rd_data(dma_sp_rd_data),
    .sp_wr_valid(dma_sp_wr_valid), .sp_wr_ready(dma_sp_wr_ready), .sp_wr_addr(dma_sp_wr_addr),
    .sp_wr_data(dma_sp_wr_data),
    .acc_rd_valid(dma_acc_rd_valid), .acc_rd_addr(dma_acc_rd_addr),
    .acc_rd_resp_valid(dma_acc_rd_resp_valid), .acc_rd_data(dma_acc_rd_data),
    .acc_wr_valid(dma_acc_wr_valid), .acc_wr_ready(dma_acc_wr_ready), .acc_wr_addr(dma_acc_wr_addr),
    .acc_wr_accum(dma_acc_wr_accum), .acc_wr_data(dma_acc_wr_data)
  );

  local_tlb #(.ENTRIES(TLB_ENTRIES), .HIT_LAT(TLB_HIT_LAT)) u_tlb (
    .clk, .rst_n,
    .req_valid(tlb_req_valid), .req_vpn(tlb_req_vpn), .req_write(tlb_req_write),
    .resp_valid(tlb_resp_valid), .resp_ppn(tlb_resp_ppn),
    .ptw_req_valid, .ptw_req_ready, .ptw_req_vpn, .ptw_resp_valid, .ptw_resp_ppn,
    .flush(tlb_flush),
    .n_filter_hits(n_tlb_filter_hits), .n_tlb_hits, .n_misses(n_tlb_misses)
  );

  // ================= execute path =================
  logic signed [IN_W-1:0]  m_in_a [DIM];
  logic signed [ACC_W-1:0] m_in_b [DIM], m_in_d [DIM], m_out_b [DIM], m_out_d [DIM];
  pe_ctrl_t                m_in_ctrl, m_out_ctrl;
  logic                    tr_wr_en;
  logic [$clog2(DIM)-1:0]  tr_wr_idx, tr_rd_idx;
  logic [ROW_W-1:0]        tr_wr_row, tr_rd_col;
  logic                    i2c_start, i2c_step;
  logic [LADDR_W-1:0]      i2c_base, i2c_addr;
  im2col_cfg_t             i2c_cfg;
  logic [15:0]             i2c_oh0, i2c_ow0;

  ex_controller #(.DIM(DIM), .SP_AW(SP_AW), .ACC_AW(ACC_AW)) u_ex (
    .clk, .rst_n,
    .cmd_valid(iss_valid[U_EX]), .cmd_ready(iss_ready[U_EX]), .cmd(iss_cmd[U_EX]),
    .done(dn_valid[U_EX]),
    .sp_rd_valid(ex_sp_rd_valid), .sp_rd_addr(ex_sp_rd_addr),
    .sp_rd_resp_valid(ex_sp_rd_resp_valid), .sp_rd_data(ex_sp_rd_data),
    .acc_wr_valid(ex_acc_wr_valid), .acc_wr_addr(ex_acc_wr_addr), .acc_wr_accum(ex_acc_wr_accum),
    .acc_wr_data(ex_acc_wr_data),
    .sp_wr_valid(ex_sp_wr_valid), .sp_wr_addr(ex_sp_wr_addr), .sp_wr_data(ex_sp_wr_data),
    .m_in_a, .m_in_b, .m_in_d, .m_in_ctrl, .m_out_b, .m_out_d, .m_out_ctrl,
    .tr_wr_en, .tr_wr_idx, .tr_wr_row, .tr_rd_idx, .tr_rd_col,
    .i2c_start, .i2c_base, .i2c_cfg, .i2c_oh0, .i2c_ow0, .i2c_step, .i2c_addr
  );

  mesh #(.MESH_ROWS(DIM), .MESH_COLS(DIM), .TILE_ROWS(1), .TILE_COLS(1)) u_mesh (
    .clk, .rst_n,
    .in_a(m_in_a), .in_b(m_in_b), .in_d(m_in_d), .in_ctrl(m_in_ctrl),
    .out_b(m_out_b), .out_d(m_out_d), .out_ctrl(m_out_ctrl)
  );

  transposer #(.DIM(DIM)) u_tr (
    .clk, .wr_en(tr_wr_en), .wr_idx(tr_wr_idx), .wr_row(tr_wr_row),
    .rd_idx(tr_rd_idx), .rd_col(tr_rd_col)
  );

  im2col u_i2c (
    .clk, .rst_n, .start(i2c_start), .base(i2c_base), .cfg(i2c_cfg),
    .oh0(i2c_oh0), .ow0(i2c_ow0), .step(i2c_step), .addr(i2c_addr)
  );

endmodule
