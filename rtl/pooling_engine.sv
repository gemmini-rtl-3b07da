// pooling_engine: max pooling of rows on their way out to memory.
//
// Rows of DIM signed elements arrive one per cycle on in_valid/in_row. The
// engine keeps the element-wise maximum of the rows seen in the current
// window; after pool_size rows it presents the maximum on out_row with
// out_valid for one cycle (registered: the cycle after the window's last row)
// and starts a new window. pool_size 0 or 1 passes every row through with the
// same one-cycle latency. clear restarts a window (start of a new mvout).
// The window runs along consecutive rows with a stride equal to its size;
// the paper only names a pooling engine, so this window shape is this
// design's choice.
module pooling_engine #(
  parameter int DIM      = gemmini_pkg::DIM,
  parameter int IN_W     = gemmini_pkg::IN_W,
  parameter int MAX_POOL = 4,
  localparam int PW      = $clog2(MAX_POOL + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [PW-1:0]       pool_size,
  input  logic                in_valid,
  input  logic [DIM*IN_W-1:0] in_row,
  output logic                out_valid,
  output logic [DIM*IN_W-1:0] out_row
);
  logic [DIM*IN_W-1:0] run_max, nxt_max;
  logic [PW-1:0]       cnt;
  logic                last;

  assign last = (pool_size <= 1) || (cnt == pool_size - 1'b1);

  always_comb begin
    for (int i = 0; i < DIM; i++) begin
      if (cnt == '0 || $signed(in_row[i*IN_W +: IN_W]) > $signed(run_max[i*IN_W +: IN_W]))
        nxt_max[i*IN_W +: IN_W] = in_row[i*IN_W +: IN_W];
      else
        nxt_max[i*IN_W +: IN_W] = run_max[i*IN_W +: IN_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      run_max   <= '0;
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        if (last) begin
          cnt       <= '0;
          out_valid <= 1'b1;
          out_row   <= nxt_max;
        end else begin
          cnt     <= cnt + 1'b1;
          run_max <= nxt_max;
        end
      end
    end
  end
endmodule
