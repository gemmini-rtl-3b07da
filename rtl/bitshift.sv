// bitshift: rounding arithmetic right shift and saturation to the input type.
// For each element x (IN_BITS wide, signed) and shift s:
//   y = (x + 2^(s-1)) >>> s   (round half up; y = x when s = 0)
//   out = clamp(y, -2^(OUT_W-1), 2^(OUT_W-1)-1)
// Combinational. It brings 32-bit accumulated (and scaled) values back to the
// 8-bit scratchpad format on their way out. The rounding mode and saturation
// are this design's choices; the paper only names the unit.
module bitshift #(
  parameter int DIM     = gemmini_pkg::DIM,
  parameter int IN_BITS = gemmini_pkg::PROD_W,
  parameter int OUT_W   = gemmini_pkg::IN_W,
  parameter int SHIFT_W = 6
) (
  input  logic [DIM*IN_BITS-1:0] in,
  input  logic [SHIFT_W-1:0]     shift,
  output logic [DIM*OUT_W-1:0]   out
);
  localparam logic signed [IN_BITS:0] MAXV = (IN_BITS+1)'((1 << (OUT_W-1)) - 1);
  localparam logic signed [IN_BITS:0] MINV = -(IN_BITS+1)'(1 << (OUT_W-1));

  always_comb begin
    for (int i = 0; i < DIM; i++) begin
      logic signed [IN_BITS:0] x, rnd, y;
      x   = (IN_BITS+1)'($signed(in[i*IN_BITS +: IN_BITS]));
      rnd = (shift == '0) ? '0 : (IN_BITS+1)'(1) <<< (shift - 1'b1);
      y   = (x + rnd) >>> shift;
      if (y > MAXV)      out[i*OUT_W +: OUT_W] = MAXV[OUT_W-1:0];
      else if (y < MINV) out[i*OUT_W +: OUT_W] = MINV[OUT_W-1:0];
      else               out[i*OUT_W +: OUT_W] = y[OUT_W-1:0];
    end
  end
endmodule
