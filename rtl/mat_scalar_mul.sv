// mat_scalar_mul: multiplies every element of an accumulator row by one
// unsigned scalar, widening so that nothing is lost before the bit shift.
// Purely combinational: out[i] = in[i] * scale (signed x unsigned).
// The matrix-scalar multiplication on the read-out path follows the paper;
// the integer scalar and its width are this design's.
module mat_scalar_mul #(
  parameter int DIM     = gemmini_pkg::DIM,
  parameter int ACC_W   = gemmini_pkg::ACC_W,
  parameter int SCALE_W = gemmini_pkg::SCALE_W,
  localparam int OUT_W  = ACC_W + SCALE_W
) (
  input  logic [DIM*ACC_W-1:0] in,
  input  logic [SCALE_W-1:0]   scale,
  output logic [DIM*OUT_W-1:0] out
);
  always_comb begin
    for (int i = 0; i < DIM; i++) begin
      logic signed [OUT_W-1:0] x, s;
      x = OUT_W'($signed(in[i*ACC_W +: ACC_W]));   // sign-extend
      s = OUT_W'(scale);                            // zero-extend
      out[i*OUT_W +: OUT_W] = x * s;
    end
  end
endmodule
