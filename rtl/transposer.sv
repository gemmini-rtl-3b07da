// transposer: turns a DIM x DIM block of row vectors into column vectors.
//
// Rows are written one per cycle (wr_en, wr_idx, wr_row); column rd_idx of
// the stored block is read combinationally on rd_col, so the block can be
// read out column by column as soon as its last row is written. The
// output-stationary dataflow needs the A operand one column per cycle while
// the scratchpad holds A by rows; this block bridges the two.
// The paper names a transposer; its register-matrix form is this design's.
module transposer #(
  parameter int DIM   = gemmini_pkg::DIM,
  parameter int IN_W  = gemmini_pkg::IN_W,
  localparam int IW   = $clog2(DIM)
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [IW-1:0]       wr_idx,
  input  logic [DIM*IN_W-1:0] wr_row,
  input  logic [IW-1:0]       rd_idx,
  output logic [DIM*IN_W-1:0] rd_col
);
  logic [IN_W-1:0] m [DIM][DIM];   // m[row][col]

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < DIM; c++) m[wr_idx][c] <= wr_row[c*IN_W +: IN_W];
  end

  always_comb begin
    for (int r = 0; r < DIM; r++) rd_col[r*IN_W +: IN_W] = m[r][rd_idx];
  end
endmodule
