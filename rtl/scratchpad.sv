// scratchpad: the explicitly managed, banked input memory.
//
// SP_KB kilobytes of rows, each DIM elements of IN_W bits, split into
// SP_BANKS banks by the high bits of the row address. Each bank serves one
// read and one write per cycle. Two clients share it: the execute controller
// (ex_*: operand reads, and result rows when a compute targets the
// scratchpad) always wins, the DMA engine (dma_*) is granted a bank only when the
// execute controller does not use that bank in the same cycle, and otherwise
// sees its ready low and must hold its request.
// Timing: a read accepted in cycle t returns data in cycle t+1 with
// *_rd_resp_valid (the data is held only in that cycle); a write accepted in
// cycle t is visible to reads from t+1.
// A banked scratchpad follows the paper; its capacity is the paper's 256 KB.
// The bank count, ports and arbitration are this design's. The arrays stand
// in for SRAM macros.
module scratchpad
  import gemmini_pkg::*;
#(
  parameter int DIM      = gemmini_pkg::DIM,
  parameter int IN_W     = gemmini_pkg::IN_W,
  parameter int SP_KB    = gemmini_pkg::SP_KB,
  parameter int SP_BANKS = gemmini_pkg::SP_BANKS,
  localparam int ROW_W   = DIM * IN_W,
  localparam int ROWS    = SP_KB * 1024 * 8 / ROW_W,
  localparam int BROWS   = ROWS / SP_BANKS,
  localparam int AW      = $clog2(ROWS),
  localparam int BW      = (SP_BANKS > 1) ? $clog2(SP_BANKS) : 1,
  localparam int RW      = $clog2(BROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // execute controller, priority
  input  logic             ex_rd_valid,
  input  logic [AW-1:0]    ex_rd_addr,
  output logic             ex_rd_resp_valid,
  output logic [ROW_W-1:0] ex_rd_data,
  // DMA engine
  input  logic             dma_rd_valid,
  output logic             dma_rd_ready,
  input  logic [AW-1:0]    dma_rd_addr,
  output logic             dma_rd_resp_valid,
  output logic [ROW_W-1:0] dma_rd_data,
  input  logic             ex_wr_valid,
  input  logic [AW-1:0]    ex_wr_addr,
  input  logic [ROW_W-1:0] ex_wr_data,
  input  logic             dma_wr_valid,
  output logic             dma_wr_ready,
  input  logic [AW-1:0]    dma_wr_addr,
  input  logic [ROW_W-1:0] dma_wr_data,
  // bank conflicts seen by the DMA (for performance counting)
  output logic             dma_conflict
);
  function automatic logic [BW-1:0] bank_of(logic [AW-1:0] a);
    return (SP_BANKS > 1) ? BW'(a >> RW) : '0;
  endfunction

  logic dma_rd_go, dma_wr_go;
  assign dma_rd_ready = !(ex_rd_valid && bank_of(ex_rd_addr) == bank_of(dma_rd_addr));
  assign dma_wr_ready = !(ex_wr_valid && bank_of(ex_wr_addr) == bank_of(dma_wr_addr));
  assign dma_rd_go    = dma_rd_valid && dma_rd_ready;
  assign dma_wr_go    = dma_wr_valid && dma_wr_ready;
  assign dma_conflict = dma_rd_valid && !dma_rd_ready;

  // One read and one write port per bank: the execute unit takes its bank's
  // port, a DMA access only gets a bank the execute unit leaves free.
  logic [ROW_W-1:0] bank_q [SP_BANKS];
  for (genvar k = 0; k < SP_BANKS; k++) begin : g_bank
    logic [ROW_W-1:0] mem [BROWS];
    logic             ex_here, dma_here;
    assign ex_here  = ex_rd_valid && bank_of(ex_rd_addr) == BW'(k);
    assign dma_here = dma_rd_go && bank_of(dma_rd_addr) == BW'(k);
    always_ff @(posedge clk) begin
      if (ex_wr_valid && bank_of(ex_wr_addr) == BW'(k))    mem[RW'(ex_wr_addr)]  <= ex_wr_data;
      else if (dma_wr_go && bank_of(dma_wr_addr) == BW'(k)) mem[RW'(dma_wr_addr)] <= dma_wr_data;
      if (ex_here)       bank_q[k] <= mem[RW'(ex_rd_addr)];
      else if (dma_here) bank_q[k] <= mem[RW'(dma_rd_addr)];
    end
  end

  logic [BW-1:0] ex_bank_q, dma_bank_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_rd_resp_valid  <= 1'b0;
      dma_rd_resp_valid <= 1'b0;
      ex_bank_q         <= '0;
      dma_bank_q        <= '0;
    end else begin
      ex_rd_resp_valid  <= ex_rd_valid;
      dma_rd_resp_valid <= dma_rd_go;
      ex_bank_q         <= bank_of(ex_rd_addr);
      dma_bank_q        <= bank_of(dma_rd_addr);
    end
  end
  assign ex_rd_data  = bank_q[ex_bank_q];
  assign dma_rd_data = bank_q[dma_bank_q];

endmodule
