// pe: one processing element of the spatial array.
//
// Each cycle a PE performs at most one multiply-accumulate, in one of two
// dataflows selected by the control word that travels with the data:
//   weight-stationary (WS): the stationary register c holds a weight; the
//     partial sum arriving from above leaves below as in_b + in_a * c.
//   output-stationary (OS): c is the running output; c += in_a * in_b, and
//     in_b (the B operand) is passed down unchanged.
// With ctrl.load set, c takes in_d and the old c leaves on out_d, so a column
// of PEs forms a shift chain used both to preload weights (WS) and to drain
// results (OS).
// Interface: in_a enters from the left and leaves right unchanged; in_b, in_d
// and in_ctrl enter from above and leave below. All paths through the PE are
// combinational except c, which updates on the clock edge.
// The two dataflows and the single MAC per cycle follow the paper; the preload
// shift chain, the 8/32-bit widths and the control encoding are this design's.
// Lint note: Verilator may report UNOPTFLAT on a PE's inputs when PEs are
// chained inside a tile. The paths are combinational within a tile by design
// (a tile is a block of PEs with no registers between them) and form no loop.
module pe
  import gemmini_pkg::*;
#(
  parameter int IN_W  = gemmini_pkg::IN_W,
  parameter int ACC_W = gemmini_pkg::ACC_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  in_a,
  input  logic signed [ACC_W-1:0] in_b,
  input  logic signed [ACC_W-1:0] in_d,
  input  pe_ctrl_t                in_ctrl,
  output logic signed [IN_W-1:0]  out_a,
  output logic signed [ACC_W-1:0] out_b,
  output logic signed [ACC_W-1:0] out_d,
  output pe_ctrl_t                out_ctrl
);
  logic signed [ACC_W-1:0]  c;
  logic signed [2*IN_W-1:0] prod_ws, prod_os;

  assign prod_ws  = in_a * $signed(c[IN_W-1:0]);
  assign prod_os  = in_a * $signed(in_b[IN_W-1:0]);

  assign out_a    = in_a;
  assign out_ctrl = in_ctrl;
  assign out_d    = c;
  assign out_b    = (in_ctrl.df == DF_WS) ? in_b + ACC_W'(prod_ws) : in_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      c <= '0;
    else if (in_ctrl.load)
      c <= in_d;
    else if (in_ctrl.valid && in_ctrl.df == DF_OS)
      c <= c + ACC_W'(prod_os);
  end

endmodule
