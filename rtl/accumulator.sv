// accumulator: the wide result memory with its adders.
//
// ACC_KB kilobytes of rows, each DIM elements of ACC_W bits. A write either
// overwrites a row or, with its accumulate flag set, adds the incoming DIM
// values element by element to the row already stored, so partial results of
// a tiled matrix multiply or convolution are summed in place.
// Two writers: the execute controller (ex_wr_*, always accepted) and the DMA
// engine (dma_wr_*, dma_wr_ready low while the execute controller writes).
// One reader, the DMA engine: a read accepted in cycle t returns in t+1.
// Timing: a write in cycle t (including its add) is visible to reads from
// t+1. The higher-bitwidth accumulator with adders follows the paper and its
// 64 KB capacity is the paper's; ports and arbitration are this design's.
module accumulator
  import gemmini_pkg::*;
#(
  parameter int DIM     = gemmini_pkg::DIM,
  parameter int ACC_W   = gemmini_pkg::ACC_W,
  parameter int ACC_KB  = gemmini_pkg::ACC_KB,
  localparam int ROW_W  = DIM * ACC_W,
  localparam int ROWS   = ACC_KB * 1024 * 8 / ROW_W,
  localparam int AW     = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ex_wr_valid,
  input  logic [AW-1:0]    ex_wr_addr,
  input  logic             ex_wr_accum,
  input  logic [ROW_W-1:0] ex_wr_data,
  input  logic             dma_wr_valid,
  output logic             dma_wr_ready,
  input  logic [AW-1:0]    dma_wr_addr,
  input  logic             dma_wr_accum,
  input  logic [ROW_W-1:0] dma_wr_data,
  input  logic             rd_valid,
  input  logic [AW-1:0]    rd_addr,
  output logic             rd_resp_valid,
  output logic [ROW_W-1:0] rd_data
);
  logic [ROW_W-1:0] mem [ROWS];

  logic             wr_en, wr_accum;
  logic [AW-1:0]    wr_addr;
  logic [ROW_W-1:0] wr_data, wr_old, wr_new;

  assign dma_wr_ready = !ex_wr_valid;
  always_comb begin
    wr_en    = ex_wr_valid || dma_wr_valid;
    wr_addr  = ex_wr_valid ? ex_wr_addr  : dma_wr_addr;
    wr_accum = ex_wr_valid ? ex_wr_accum : dma_wr_accum;
    wr_data  = ex_wr_valid ? ex_wr_data  : dma_wr_data;
    wr_old   = mem[wr_addr];
    for (int i = 0; i < DIM; i++)
      wr_new[i*ACC_W +: ACC_W] = wr_accum ? wr_old[i*ACC_W +: ACC_W] + wr_data[i*ACC_W +: ACC_W]
                                          : wr_data[i*ACC_W +: ACC_W];
  end

  always_ff @(posedge clk) begin
    if (wr_en)    mem[wr_addr] <= wr_new;
    if (rd_valid) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_resp_valid <= 1'b0;
    else        rd_resp_valid <= rd_valid;
  end

endmodule
