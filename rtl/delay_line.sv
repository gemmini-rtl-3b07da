// delay_line: a W-bit shift register of depth N (N = 0 is a plain wire).
// Every stage is reset to zero. Used for the skew and de-skew registers at
// the edges of the spatial array.
// Lint note: with N = 0 the clock and reset inputs are unused.
module delay_line #(
  parameter int W = 8,
  parameter int N = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (N == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] sr [N];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < N; i++) sr[i] <= '0;
      end else begin
        sr[0] <= d;
        for (int i = 1; i < N; i++) sr[i] <= sr[i-1];
      end
    end
    assign q = sr[N-1];
  end
endmodule
