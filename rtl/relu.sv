// relu: activation on rows leaving the accumulator.
//   ACT_NONE : pass through
//   ACT_RELU : max(x, 0)
//   ACT_RELU6: min(max(x, 0), 6 << relu6_shift), the bound saturated to the
//              largest positive value; relu6_shift says where the binary point
//              of the fixed-point values lies.
// Combinational. ReLU and ReLU6 are the paper's; the fixed-point bound is
// this design's.
module relu
  import gemmini_pkg::*;
#(
  parameter int DIM  = gemmini_pkg::DIM,
  parameter int IN_W = gemmini_pkg::IN_W
) (
  input  logic [DIM*IN_W-1:0] in,
  input  act_t                act,
  input  logic [3:0]          relu6_shift,
  output logic [DIM*IN_W-1:0] out
);
  logic signed [IN_W+15:0] bound;
  localparam logic signed [IN_W+15:0] MAXP = (1 << (IN_W-1)) - 1;

  always_comb begin
    bound = (IN_W+16)'(6) <<< relu6_shift;
    if (bound > MAXP) bound = MAXP;
    for (int i = 0; i < DIM; i++) begin
      logic signed [IN_W-1:0] x;
      x = $signed(in[i*IN_W +: IN_W]);
      unique case (act)
        ACT_RELU:  out[i*IN_W +: IN_W] = (x < 0) ? '0 : x;
        ACT_RELU6: out[i*IN_W +: IN_W] = (x < 0) ? '0
                                       : ((IN_W+16)'(x) > bound) ? bound[IN_W-1:0] : x;
        default:   out[i*IN_W +: IN_W] = x;
      endcase
    end
  end
endmodule
