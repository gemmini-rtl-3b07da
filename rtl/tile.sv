// tile: a rectangular block of PEs joined without pipeline registers.
//
// Operand a flows left to right along each PE row, and b, d and the control
// word flow top to bottom along each PE column, all combinationally, so a
// tile with several PEs per column forms a MAC reduction chain in one cycle
// (the vector-engine end of the design space). A 1x1 tile is a plain
// systolic cell. The combinational joining of PEs inside a tile follows the
// paper; the port bundling is this design's.
// Interface: in_a[r] enters row r on the left, out_a[r] leaves on the right;
// in_b/in_d/in_ctrl[c] enter column c at the top, out_*[c] leave at the bottom.
// Lint note: verilator flags the internal a/b/k arrays as circular logic
// (UNOPTFLAT) because it treats each array as one signal; element (r,c) only
// feeds (r,c+1) or (r+1,c), so there is no loop.
module tile
  import gemmini_pkg::*;
#(
  parameter int TILE_ROWS = 1,
  parameter int TILE_COLS = 1,
  parameter int IN_W      = gemmini_pkg::IN_W,
  parameter int ACC_W     = gemmini_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  in_a    [TILE_ROWS],
  input  logic signed [ACC_W-1:0] in_b    [TILE_COLS],
  input  logic signed [ACC_W-1:0] in_d    [TILE_COLS],
  input  pe_ctrl_t                in_ctrl [TILE_COLS],
  output logic signed [IN_W-1:0]  out_a   [TILE_ROWS],
  output logic signed [ACC_W-1:0] out_b   [TILE_COLS],
  output logic signed [ACC_W-1:0] out_d   [TILE_COLS],
  output pe_ctrl_t                out_ctrl[TILE_COLS]
);
  // a[r][c] is the a input of PE (r,c); a[r][TILE_COLS] is the row's exit.
  logic signed [IN_W-1:0]  a [TILE_ROWS][TILE_COLS+1];
  logic signed [ACC_W-1:0] b [TILE_ROWS+1][TILE_COLS];
  logic signed [ACC_W-1:0] d [TILE_ROWS+1][TILE_COLS];
  pe_ctrl_t                k [TILE_ROWS+1][TILE_COLS];

  for (genvar r = 0; r < TILE_ROWS; r++) begin : g_row_io
    assign a[r][0]  = in_a[r];
    assign out_a[r] = a[r][TILE_COLS];
  end
  for (genvar c = 0; c < TILE_COLS; c++) begin : g_col_io
    assign b[0][c]     = in_b[c];
    assign d[0][c]     = in_d[c];
    assign k[0][c]     = in_ctrl[c];
    assign out_b[c]    = b[TILE_ROWS][c];
    assign out_d[c]    = d[TILE_ROWS][c];
    assign out_ctrl[c] = k[TILE_ROWS][c];
  end

  for (genvar r = 0; r < TILE_ROWS; r++) begin : g_r
    for (genvar c = 0; c < TILE_COLS; c++) begin : g_c
      pe #(.IN_W(IN_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .in_a(a[r][c]), .in_b(b[r][c]), .in_d(d[r][c]), .in_ctrl(k[r][c]),
        .out_a(a[r][c+1]), .out_b(b[r+1][c]), .out_d(d[r+1][c]), .out_ctrl(k[r+1][c])
      );
    end
  end

endmodule
