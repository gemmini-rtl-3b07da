// mesh: the two-level spatial array.
//
// MESH_ROWS x MESH_COLS tiles, each TILE_ROWS x TILE_COLS PEs. Tiles are
// separated by pipeline registers on every signal that crosses a tile
// boundary: operand a moving right, and b, d and the control word moving
// down. With 1x1 tiles the array is a fully pipelined systolic array; with
// one big tile it is a set of combinational MAC reduction trees. Both
// extremes and the points between are reached by the four parameters.
//
// Because a datum crossing k tile boundaries is k cycles late, the inputs are
// skewed on the way in (tile row r's a-inputs by r cycles, tile column c's
// b/d/control inputs by c cycles) and the bottom outputs are de-skewed (tile
// column c by MESH_COLS-1-c cycles). The caller therefore sees a plain
// pipeline: a row vector presented on in_* with control in_ctrl produces its
// result on out_b/out_d together with that control on out_ctrl exactly
// LATENCY = MESH_ROWS + MESH_COLS - 2 cycles later.
//
// Uses (see pe): WS preload = DIM cycles of load with weight rows fed last
// row first; WS compute = rows of A on in_a, zeros on in_b, A*W rows on out_b.
// OS compute = columns of A on in_a and rows of B on in_b; OS drain = DIM
// cycles of load, old C rows emerge on out_d, last row first.
// The tile/pipeline-register hierarchy follows the paper; the skew registers
// and the control word are this design's.
// Lint note: verilator flags the tile-boundary arrays as circular logic
// (UNOPTFLAT) because it treats each array as one signal. No element feeds
// itself: every path between tiles passes a pipeline register.
module mesh
  import gemmini_pkg::*;
#(
  parameter int MESH_ROWS = 16,
  parameter int MESH_COLS = 16,
  parameter int TILE_ROWS = 1,
  parameter int TILE_COLS = 1,
  parameter int IN_W      = gemmini_pkg::IN_W,
  parameter int ACC_W     = gemmini_pkg::ACC_W,
  localparam int ROWS     = MESH_ROWS * TILE_ROWS,
  localparam int COLS     = MESH_COLS * TILE_COLS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [IN_W-1:0]  in_a [ROWS],
  input  logic signed [ACC_W-1:0] in_b [COLS],
  input  logic signed [ACC_W-1:0] in_d [COLS],
  input  pe_ctrl_t                in_ctrl,
  output logic signed [ACC_W-1:0] out_b[COLS],
  output logic signed [ACC_W-1:0] out_d[COLS],
  output pe_ctrl_t                out_ctrl
);
  localparam int CW = $bits(pe_ctrl_t);

  // Tile-boundary signals. ta[r][c]: a entering tile (r,c) from the left.
  // tb/td/tk[r][c]: entering tile (r,c) from above. Index MESH_COLS / MESH_ROWS
  // are the exits.
  logic signed [IN_W-1:0]  ta     [MESH_ROWS][MESH_COLS+1][TILE_ROWS];
  logic signed [ACC_W-1:0] tb     [MESH_ROWS+1][MESH_COLS][TILE_COLS];
  logic signed [ACC_W-1:0] td     [MESH_ROWS+1][MESH_COLS][TILE_COLS];
  pe_ctrl_t                tk     [MESH_ROWS+1][MESH_COLS][TILE_COLS];
  // Tile outputs before the pipeline registers.
  logic signed [IN_W-1:0]  oa     [MESH_ROWS][MESH_COLS][TILE_ROWS];
  logic signed [ACC_W-1:0] ob     [MESH_ROWS][MESH_COLS][TILE_COLS];
  logic signed [ACC_W-1:0] od     [MESH_ROWS][MESH_COLS][TILE_COLS];
  pe_ctrl_t                ok     [MESH_ROWS][MESH_COLS][TILE_COLS];

  // ---------------- input skew ----------------
  for (genvar r = 0; r < MESH_ROWS; r++) begin : g_skew_a
    for (genvar i = 0; i < TILE_ROWS; i++) begin : g_i
      logic [IN_W-1:0] q;
      delay_line #(.W(IN_W), .N(r)) u_dl (.clk, .rst_n, .d(in_a[r*TILE_ROWS+i]), .q);
      assign ta[r][0][i] = q;
    end
  end
  for (genvar c = 0; c < MESH_COLS; c++) begin : g_skew_b
    logic [CW-1:0] kq;
    delay_line #(.W(CW), .N(c)) u_dlk (.clk, .rst_n, .d(in_ctrl), .q(kq));
    for (genvar j = 0; j < TILE_COLS; j++) begin : g_j
      logic [ACC_W-1:0] bq, dq;
      delay_line #(.W(ACC_W), .N(c)) u_dlb (.clk, .rst_n, .d(in_b[c*TILE_COLS+j]), .q(bq));
      delay_line #(.W(ACC_W), .N(c)) u_dld (.clk, .rst_n, .d(in_d[c*TILE_COLS+j]), .q(dq));
      assign tb[0][c][j] = bq;
      assign td[0][c][j] = dq;
      assign tk[0][c][j] = pe_ctrl_t'(kq);
    end
  end

  // ---------------- tiles and pipeline registers ----------------
  for (genvar r = 0; r < MESH_ROWS; r++) begin : g_r
    for (genvar c = 0; c < MESH_COLS; c++) begin : g_c
      tile #(.TILE_ROWS(TILE_ROWS), .TILE_COLS(TILE_COLS), .IN_W(IN_W), .ACC_W(ACC_W)) u_tile (
        .clk, .rst_n,
        .in_a(ta[r][c]), .in_b(tb[r][c]), .in_d(td[r][c]), .in_ctrl(tk[r][c]),
        .out_a(oa[r][c]), .out_b(ob[r][c]), .out_d(od[r][c]), .out_ctrl(ok[r][c])
      );

      // horizontal pipeline register (a); the last column's exit is unused
      if (c < MESH_COLS - 1) begin : g_hreg
        logic signed [IN_W-1:0] a_q [TILE_ROWS];
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) a_q <= '{default: '0};
          else        a_q <= oa[r][c];
        end
        assign ta[r][c+1] = a_q;
      end else begin : g_hexit
        assign ta[r][c+1] = oa[r][c];
      end

      // vertical pipeline register (b, d, control); the last row is the output
      if (r < MESH_ROWS - 1) begin : g_vreg
        logic signed [ACC_W-1:0] b_q [TILE_COLS];
        logic signed [ACC_W-1:0] d_q [TILE_COLS];
        pe_ctrl_t                k_q [TILE_COLS];
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            b_q <= '{default: '0};
            d_q <= '{default: '0};
            k_q <= '{default: pe_ctrl_t'('0)};
          end else begin
            b_q <= ob[r][c];
            d_q <= od[r][c];
            k_q <= ok[r][c];
          end
        end
        assign tb[r+1][c] = b_q;
        assign td[r+1][c] = d_q;
        assign tk[r+1][c] = k_q;
      end else begin : g_vexit
        assign tb[r+1][c] = ob[r][c];
        assign td[r+1][c] = od[r][c];
        assign tk[r+1][c] = ok[r][c];
      end
    end
  end

  // ---------------- output de-skew ----------------
  for (genvar c = 0; c < MESH_COLS; c++) begin : g_deskew
    for (genvar j = 0; j < TILE_COLS; j++) begin : g_j
      logic [ACC_W-1:0] bq, dq;
      delay_line #(.W(ACC_W), .N(MESH_COLS-1-c)) u_dlb (.clk, .rst_n, .d(tb[MESH_ROWS][c][j]), .q(bq));
      delay_line #(.W(ACC_W), .N(MESH_COLS-1-c)) u_dld (.clk, .rst_n, .d(td[MESH_ROWS][c][j]), .q(dq));
      assign out_b[c*TILE_COLS+j] = bq;
      assign out_d[c*TILE_COLS+j] = dq;
    end
  end
  logic [CW-1:0] kout;
  delay_line #(.W(CW), .N(MESH_COLS-1)) u_dlk_out (.clk, .rst_n, .d(tk[MESH_ROWS][0][0]), .q(kout));
  assign out_ctrl = pe_ctrl_t'(kout);

endmodule
