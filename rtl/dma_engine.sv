// dma_engine: moves rows between main memory and the local memories.
//
// Commands (rocc_cmd_t, one at a time, cmd_valid/cmd_ready, done pulses when
// a command has finished):
//   CONFIG ld  rs2[63:32] = load row stride in bytes
//   CONFIG st  rs2[63:32] = store row stride, rs2[15:0] = scale,
//              rs1[3:2] = activation, rs1[9:4] = shift, rs1[12:10] = pool size,
//              rs1[19:16] = ReLU6 shift
//   MVIN       rs1 = virtual address, rs2[31:0] = local address,
//              rs2[47:32] = rows. Row r is read from rs1 + r*stride.
//   MVOUT      as MVIN, towards memory. Rows leaving the accumulator are
//              scaled, rounded-shifted and saturated to 8 bits and passed
//              through the activation; every row then goes through the pooling
//              engine, and pooled row o is written to rs1 + o*stride.
//   FLUSH      empties the TLB.
// Every row costs one translation (local TLB, often a 0-cycle filter hit),
// one memory request of one 16-byte row and, for loads, a write into the
// scratchpad or (sign-extended, optionally accumulated) the accumulator.
// Memory port: mem_req_* valid/ready with write flag, physical address and
// data; every request (read or write) is answered by one mem_resp_valid,
// carrying the data for reads. Rows are processed one at a time.
// That the DMA engine translates through the local TLB and feeds the
// scratchpad/accumulator follows the paper; the command fields, memory port
// and one-row-at-a-time operation are this design's.
// Lint note: local row addresses are 30 bits wide in the command format but
// only the bits that index the configured memories are used; the upper bits
// are ignored (addresses wrap).
module dma_engine
  import gemmini_pkg::*;
#(
  parameter int DIM    = gemmini_pkg::DIM,
  parameter int SP_AW  = 14,
  parameter int ACC_AW = 10,
  localparam int ROW_W  = DIM * IN_W,
  localparam int AROW_W = DIM * ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  rocc_cmd_t         cmd,
  output logic              done,
  // local TLB
  output logic              tlb_req_valid,
  output logic [VPN_W-1:0]  tlb_req_vpn,
  output logic              tlb_req_write,
  input  logic              tlb_resp_valid,
  input  logic [PPN_W-1:0]  tlb_resp_ppn,
  output logic              tlb_flush,
  // memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_write,
  output logic [PADDR_W-1:0] mem_req_addr,
  output logic [ROW_W-1:0]  mem_req_data,
  input  logic              mem_resp_valid,
  input  logic [ROW_W-1:0]  mem_resp_data,
  // scratchpad
  output logic              sp_rd_valid,
  input  logic              sp_rd_ready,
  output logic [SP_AW-1:0]  sp_rd_addr,
  input  logic              sp_rd_resp_valid,
  input  logic [ROW_W-1:0]  sp_rd_data,
  output logic              sp_wr_valid,
  input  logic              sp_wr_ready,
  output logic [SP_AW-1:0]  sp_wr_addr,
  output logic [ROW_W-1:0]  sp_wr_data,
  // accumulator
  output logic              acc_rd_valid,
  output logic [ACC_AW-1:0] acc_rd_addr,
  input  logic              acc_rd_resp_valid,
  input  logic [AROW_W-1:0] acc_rd_data,
  output logic              acc_wr_valid,
  input  logic              acc_wr_ready,
  output logic [ACC_AW-1:0] acc_wr_addr,
  output logic              acc_wr_accum,
  output logic [AROW_W-1:0] acc_wr_data
);
  typedef enum logic [3:0] {
    S_IDLE, S_M_TRANS, S_M_REQ, S_M_RESP, S_M_WRITE,
    S_O_LREAD, S_O_LRESP, S_O_POOL, S_O_TRANS, S_O_REQ, S_O_RESP, S_DONE
  } state_t;

  state_t             state;
  // configuration
  logic [31:0]        ld_stride, st_stride;
  logic [SCALE_W-1:0] scale;
  act_t               act;
  logic [5:0]         shift;
  logic [2:0]         pool;
  logic [3:0]         relu6_shift;
  // current command
  logic [VADDR_W-1:0] base;
  logic [LADDR_W-1:0] laddr;
  logic [15:0]        rows, r, o;
  logic [PADDR_W-1:0] paddr;
  logic [ROW_W-1:0]   row_buf;

  logic               is_acc;
  logic [29:0]        lrow;
  logic [VADDR_W-1:0] vaddr;
  assign is_acc = laddr[LA_ACC_BIT];
  assign lrow   = laddr[29:0] + 30'(r);
  assign vaddr  = (state == S_M_TRANS) ? base + VADDR_W'(32'(r) * ld_stride)
                                       : base + VADDR_W'(32'(o) * st_stride);

  // ---- read-out pipeline: scale, shift/saturate, activation, pooling ----
  logic [DIM*PROD_W-1:0] scaled;
  logic [ROW_W-1:0]      shifted, activated, out_row, pooled;
  logic                  pool_in_valid, pool_out_valid;

  mat_scalar_mul #(.DIM(DIM)) u_msm (.in(acc_rd_data), .scale, .out(scaled));
  bitshift       #(.DIM(DIM)) u_shift (.in(scaled), .shift, .out(shifted));
  relu           #(.DIM(DIM)) u_relu (.in(shifted), .act, .relu6_shift, .out(activated));
  assign out_row       = is_acc ? activated : sp_rd_data;
  assign pool_in_valid = (state == S_O_LRESP) && (is_acc ? acc_rd_resp_valid : sp_rd_resp_valid);

  pooling_engine #(.DIM(DIM), .MAX_POOL(7)) u_pool (
    .clk, .rst_n, .clear(state == S_IDLE), .pool_size(pool),
    .in_valid(pool_in_valid), .in_row(out_row),
    .out_valid(pool_out_valid), .out_row(pooled)
  );

  // ---- outputs ----
  assign cmd_ready     = (state == S_IDLE);
  assign done          = (state == S_DONE);
  assign tlb_req_valid = (state == S_M_TRANS) || (state == S_O_TRANS);
  assign tlb_req_vpn   = vaddr[VADDR_W-1:PG_OFF_W];
  assign tlb_req_write = (state == S_O_TRANS);
  assign tlb_flush     = (state == S_IDLE) && cmd_valid && cmd.funct == F_FLUSH;

  assign mem_req_valid = (state == S_M_REQ) || (state == S_O_REQ);
  assign mem_req_write = (state == S_O_REQ);
  assign mem_req_addr  = paddr;
  assign mem_req_data  = row_buf;

  assign sp_rd_valid   = (state == S_O_LREAD) && !is_acc;
  assign sp_rd_addr    = SP_AW'(lrow);
  assign acc_rd_valid  = (state == S_O_LREAD) && is_acc;
  assign acc_rd_addr   = ACC_AW'(lrow);

  assign sp_wr_valid   = (state == S_M_WRITE) && !is_acc;
  assign sp_wr_addr    = SP_AW'(lrow);
  assign sp_wr_data    = row_buf;
  assign acc_wr_valid  = (state == S_M_WRITE) && is_acc;
  assign acc_wr_addr   = ACC_AW'(lrow);
  assign acc_wr_accum  = laddr[LA_ACCUM_BIT];
  always_comb begin
    for (int i = 0; i < DIM; i++)
      acc_wr_data[i*ACC_W +: ACC_W] = ACC_W'($signed(row_buf[i*IN_W +: IN_W]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      ld_stride   <= 32'(ROW_BYTES);
      st_stride   <= 32'(ROW_BYTES);
      scale       <= SCALE_W'(1);
      act         <= ACT_NONE;
      shift       <= '0;
      pool        <= '0;
      relu6_shift <= '0;
      base        <= '0;
      laddr       <= '0;
      rows        <= '0;
      r           <= '0;
      o           <= '0;
      paddr       <= '0;
      row_buf     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          base  <= cmd.rs1[VADDR_W-1:0];
          laddr <= cmd.rs2[31:0];
          rows  <= cmd.rs2[47:32];
          r     <= '0;
          o     <= '0;
          state <= S_DONE;
          unique case (cmd.funct)
            F_CONFIG: begin
              if (cmd.rs1[1:0] == CFG_LD) ld_stride <= cmd.rs2[63:32];
              if (cmd.rs1[1:0] == CFG_ST) begin
                st_stride   <= cmd.rs2[63:32];
                scale       <= cmd.rs2[SCALE_W-1:0];
                act         <= act_t'(cmd.rs1[3:2]);
                shift       <= cmd.rs1[9:4];
                pool        <= cmd.rs1[12:10];
                relu6_shift <= cmd.rs1[19:16];
              end
            end
            F_MVIN:  if (cmd.rs2[47:32] != 0) state <= S_M_TRANS;
            F_MVOUT: if (cmd.rs2[47:32] != 0) state <= S_O_LREAD;
            default: ;
          endcase
        end
        // ---------------- mvin ----------------
        S_M_TRANS: if (tlb_resp_valid) begin
          paddr <= {tlb_resp_ppn, vaddr[PG_OFF_W-1:0]};
          state <= S_M_REQ;
        end
        S_M_REQ:  if (mem_req_ready) state <= S_M_RESP;
        S_M_RESP: if (mem_resp_valid) begin
          row_buf <= mem_resp_data;
          state   <= S_M_WRITE;
        end
        S_M_WRITE: if (is_acc ? acc_wr_ready : sp_wr_ready) begin
          r     <= r + 1'b1;
          state <= (r + 1'b1 == rows) ? S_DONE : S_M_TRANS;
        end
        // ---------------- mvout ----------------
        S_O_LREAD: if (is_acc || sp_rd_ready) state <= S_O_LRESP;
        S_O_LRESP: if (pool_in_valid) begin
          r     <= r + 1'b1;
          state <= S_O_POOL;
        end
        S_O_POOL: begin
          if (pool_out_valid) begin
            row_buf <= pooled;
            state   <= S_O_TRANS;
          end else begin
            state <= (r == rows) ? S_DONE : S_O_LREAD;
          end
        end
        S_O_TRANS: if (tlb_resp_valid) begin
          paddr <= {tlb_resp_ppn, vaddr[PG_OFF_W-1:0]};
          state <= S_O_REQ;
        end
        S_O_REQ:  if (mem_req_ready) state <= S_O_RESP;
        S_O_RESP: if (mem_resp_valid) begin
          o     <= o + 1'b1;
          state <= (r == rows) ? S_DONE : S_O_LREAD;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
