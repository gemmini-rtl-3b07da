// im2col: on-the-fly generator of convolution operand addresses.
//
// The input feature map lives in the scratchpad one pixel per row (channels
// along the row), row-major over the image: pixel (y, x) at base + y*in_w + x.
// A convolution is computed as a sum, over kernel offsets (kh, kw), of
// matrix multiplies whose A row p is the input pixel under output pixel p
// shifted by that offset. This block produces those A-row addresses, so the
// host never has to build the patch matrix in memory:
//   addr = base + (oh*stride + kh) * in_w + ow*stride + kw
// for output pixels (oh, ow) in raster order starting at (oh0, ow0).
// start loads the parameters and the first pixel; each step advances to the
// next output pixel (ow wraps at out_w). addr is valid from the cycle after
// start and changes the cycle after each step. Only multiplies and adds are
// used, no division. The address order and data layout are this design's;
// the paper states only that im2col is done on the accelerator on the fly.
// Lint note: the enable bit of the configuration is not used here; the
// execute controller decides whether to use this generator's addresses.
module im2col
  import gemmini_pkg::*;
#(
  parameter int ADDR_W = gemmini_pkg::LADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  im2col_cfg_t       cfg,
  input  logic [15:0]       oh0,
  input  logic [15:0]       ow0,
  input  logic              step,
  output logic [ADDR_W-1:0] addr
);
  im2col_cfg_t       c;
  logic [ADDR_W-1:0] b;
  logic [15:0]       oh, ow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c  <= '0;
      b  <= '0;
      oh <= '0;
      ow <= '0;
    end else if (start) begin
      c  <= cfg;
      b  <= base;
      oh <= oh0;
      ow <= ow0;
    end else if (step) begin
      if (ow + 16'd1 >= c.out_w) begin
        ow <= '0;
        oh <= oh + 16'd1;
      end else begin
        ow <= ow + 16'd1;
      end
    end
  end

  assign addr = b + ADDR_W'((32'(oh) * 32'(c.stride) + 32'(c.kh)) * 32'(c.in_w))
                  + ADDR_W'(32'(ow) * 32'(c.stride) + 32'(c.kw));
endmodule
