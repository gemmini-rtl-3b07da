// ex_controller: runs one DIM x DIM x DIM matrix multiply on the spatial array.
//
// Commands (one at a time, cmd_valid/cmd_ready, done pulses at the end):
//   CONFIG ex      rs1[2] = dataflow (1 = weight-stationary, 0 = output-stationary),
//                  rs1[4:3] = activation and rs1[10:5] = shift for results
//                  written into the scratchpad
//   CONFIG im2col  rs1[2] = enable; rs2 = {kw[55:48], kh[47:40], stride[39:32],
//                  out_w[31:16], in_w[15:0]}
//   COMPUTE        rs1[31:0] = A, rs1[63:32] = B (scratchpad rows),
//                  rs2[31:0] = C (local address: bit 31 set = accumulator
//                  row, bit 30 = accumulate; bit 31 clear = scratchpad row),
//                  rs2[47:32] / rs2[63:48] = first output pixel row / column
//                  when im2col is enabled (A rows then come from the im2col
//                  address generator instead of A, A+1, ...).
// COMPUTE writes C = A * B (or C += A * B) into the accumulator, or writes
// act(round(A * B >> shift)), saturated to 8 bits, into the scratchpad.
// Weight-stationary: DIM cycles preload B into the PEs (rows fed last first),
// DIM cycles stream the rows of A; row k of the product leaves the array
// LATENCY cycles later and is written to C+k.
// Output-stationary: DIM cycles read A into the transposer while the PEs'
// accumulators are cleared by a zero preload, DIM cycles stream columns of A
// (from the transposer) against rows of B, then DIM cycles drain the results,
// which emerge last row first.
// Every scratchpad read returns a cycle later; a one-entry token pipeline
// remembers what each returning row is for. The command finishes when all
// DIM result rows are in the accumulator, so one command takes about
// 2*DIM + LATENCY (WS) or 3*DIM + LATENCY (OS) cycles.
// The two run-time dataflows and the results going to the accumulator or
// the scratchpad follow the paper; the command fields and the sequencing are this design's.
// Lint note: only the low SP_AW bits of the 32-bit A row address are used;
// the upper bits are ignored (addresses wrap).
module ex_controller
  import gemmini_pkg::*;
#(
  parameter int DIM    = gemmini_pkg::DIM,
  parameter int SP_AW  = 14,
  parameter int ACC_AW = 10,
  localparam int IW     = $clog2(DIM),
  localparam int ROW_W  = DIM * IN_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  rocc_cmd_t               cmd,
  output logic                    done,
  // scratchpad read port
  output logic                    sp_rd_valid,
  output logic [SP_AW-1:0]        sp_rd_addr,
  input  logic                    sp_rd_resp_valid,
  input  logic [ROW_W-1:0]        sp_rd_data,
  // accumulator write port
  output logic                    acc_wr_valid,
  output logic [ACC_AW-1:0]       acc_wr_addr,
  output logic                    acc_wr_accum,
  output logic [DIM*ACC_W-1:0]    acc_wr_data,
  // scratchpad write port (results sent to the scratchpad)
  output logic                    sp_wr_valid,
  output logic [SP_AW-1:0]        sp_wr_addr,
  output logic [ROW_W-1:0]        sp_wr_data,
  // spatial array
  output logic signed [IN_W-1:0]  m_in_a [DIM],
  output logic signed [ACC_W-1:0] m_in_b [DIM],
  output logic signed [ACC_W-1:0] m_in_d [DIM],
  output pe_ctrl_t                m_in_ctrl,
  input  logic signed [ACC_W-1:0] m_out_b[DIM],
  input  logic signed [ACC_W-1:0] m_out_d[DIM],
  input  pe_ctrl_t                m_out_ctrl,
  // transposer
  output logic                    tr_wr_en,
  output logic [IW-1:0]           tr_wr_idx,
  output logic [ROW_W-1:0]        tr_wr_row,
  output logic [IW-1:0]           tr_rd_idx,
  input  logic [ROW_W-1:0]        tr_rd_col,
  // im2col address generator
  output logic                    i2c_start,
  output logic [LADDR_W-1:0]      i2c_base,
  output im2col_cfg_t             i2c_cfg,
  output logic [15:0]             i2c_oh0,
  output logic [15:0]             i2c_ow0,
  output logic                    i2c_step,
  input  logic [LADDR_W-1:0]      i2c_addr
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_STREAM, S_TR, S_OS_STREAM, S_DRAIN, S_WAIT, S_DONE} state_t;
  typedef enum logic [2:0] {T_NONE, T_WS_PRE, T_WS_A, T_OS_A, T_OS_B, T_OS_DRAIN} tok_t;

  state_t        state;
  dataflow_t     df;
  act_t          out_act;
  logic [5:0]    out_shift;
  im2col_cfg_t   i2c;
  logic [31:0]   a_addr, b_addr, c_addr;
  logic [IW:0]   k;          // phase counter
  logic [IW:0]   wcnt;       // result rows written
  logic [IW+1:0] lcnt;       // OS load waves seen at the output
  tok_t          tok;        // what the row returning this cycle is for
  logic [IW-1:0] tok_idx;

  logic          last_k;
  assign last_k = (k == (IW+1)'(DIM - 1));

  // ---- scratchpad read issue ----
  logic [31:0] a_row_addr;
  assign a_row_addr = i2c.en ? i2c_addr : a_addr + 32'(k);
  always_comb begin
    sp_rd_valid = 1'b0;
    sp_rd_addr  = '0;
    unique case (state)
      S_PRE:       begin sp_rd_valid = 1'b1; sp_rd_addr = SP_AW'(b_addr + 32'(DIM - 1) - 32'(k)); end
      S_STREAM,
      S_TR:        begin sp_rd_valid = 1'b1; sp_rd_addr = SP_AW'(a_row_addr); end
      S_OS_STREAM: begin sp_rd_valid = 1'b1; sp_rd_addr = SP_AW'(b_addr + 32'(k)); end
      default: ;
    endcase
  end
  assign i2c_step  = (state == S_STREAM || state == S_TR);
  assign i2c_start = (state == S_IDLE) && cmd_valid && cmd.funct == F_COMPUTE;
  assign i2c_base  = cmd.rs1[31:0];
  assign i2c_cfg   = i2c;
  assign i2c_oh0   = cmd.rs2[47:32];
  assign i2c_ow0   = cmd.rs2[63:48];

  // ---- array inputs from the returning token ----
  assign tr_wr_en  = (tok == T_OS_A) && sp_rd_resp_valid;
  assign tr_wr_idx = tok_idx;
  assign tr_wr_row = sp_rd_data;
  assign tr_rd_idx = tok_idx;

  always_comb begin
    m_in_ctrl = '{valid: 1'b0, load: 1'b0, df: df};
    for (int i = 0; i < DIM; i++) begin
      m_in_a[i] = '0;
      m_in_b[i] = '0;
      m_in_d[i] = '0;
    end
    unique case (tok)
      T_WS_PRE: begin
        m_in_ctrl.load = 1'b1;
        for (int i = 0; i < DIM; i++) m_in_d[i] = ACC_W'($signed(sp_rd_data[i*IN_W +: IN_W]));
      end
      T_WS_A: begin
        m_in_ctrl.valid = 1'b1;
        for (int i = 0; i < DIM; i++) m_in_a[i] = sp_rd_data[i*IN_W +: IN_W];
      end
      T_OS_A, T_OS_DRAIN: m_in_ctrl.load = 1'b1;   // zeros shift in, old results out
      T_OS_B: begin
        m_in_ctrl.valid = 1'b1;
        for (int i = 0; i < DIM; i++) begin
          m_in_a[i] = tr_rd_col[i*IN_W +: IN_W];
          m_in_b[i] = ACC_W'($signed(sp_rd_data[i*IN_W +: IN_W]));
        end
      end
      default: ;
    endcase
  end

  // ---- result collection ----
  logic          res_ws, res_os;
  logic [IW:0]   os_row;
  assign res_ws = (state != S_IDLE) && m_out_ctrl.valid && m_out_ctrl.df == DF_WS;
  assign res_os = (state != S_IDLE) && m_out_ctrl.load && m_out_ctrl.df == DF_OS
                  && lcnt >= (IW+2)'(DIM);
  assign os_row = (IW+1)'(DIM - 1) - (IW+1)'(lcnt - (IW+2)'(DIM));

  logic          res;
  logic [29:0]   res_row;
  logic [ROW_W-1:0] sp_shifted;
  assign res          = res_ws || res_os;
  assign res_row      = c_addr[29:0] + (res_ws ? 30'(wcnt) : 30'(os_row));
  assign acc_wr_valid = res && c_addr[LA_ACC_BIT];
  assign acc_wr_addr  = ACC_AW'(res_row);
  assign acc_wr_accum = c_addr[LA_ACCUM_BIT];
  always_comb begin
    for (int i = 0; i < DIM; i++)
      acc_wr_data[i*ACC_W +: ACC_W] = res_ws ? m_out_b[i] : m_out_d[i];
  end

  // results sent to the scratchpad: rounding shift, saturation, activation
  bitshift #(.DIM(DIM), .IN_BITS(ACC_W), .OUT_W(IN_W), .SHIFT_W(6)) u_shift (
    .in(acc_wr_data), .shift(out_shift), .out(sp_shifted));
  relu #(.DIM(DIM), .IN_W(IN_W)) u_act (
    .in(sp_shifted), .act(out_act), .relu6_shift(4'd0), .out(sp_wr_data));
  assign sp_wr_valid = res && !c_addr[LA_ACC_BIT];
  assign sp_wr_addr  = SP_AW'(res_row);

  assign cmd_ready = (state == S_IDLE);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      df      <= DF_WS;
      out_act <= ACT_NONE;
      out_shift <= '0;
      i2c     <= '0;
      a_addr  <= '0;
      b_addr  <= '0;
      c_addr  <= '0;
      k       <= '0;
      wcnt    <= '0;
      lcnt    <= '0;
      tok     <= T_NONE;
      tok_idx <= '0;
    end else begin
      // token for the row read this cycle
      unique case (state)
        S_PRE:       tok <= T_WS_PRE;
        S_STREAM:    tok <= T_WS_A;
        S_TR:        tok <= T_OS_A;
        S_OS_STREAM: tok <= T_OS_B;
        S_DRAIN:     tok <= T_OS_DRAIN;
        default:     tok <= T_NONE;
      endcase
      tok_idx <= k[IW-1:0];

      if (res) wcnt <= wcnt + 1'b1;
      if (state != S_IDLE && m_out_ctrl.load && m_out_ctrl.df == DF_OS) lcnt <= lcnt + 1'b1;

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          k    <= '0;
          wcnt <= '0;
          lcnt <= '0;
          state <= S_DONE;
          unique case (cmd.funct)
            F_CONFIG: begin
              if (cmd.rs1[1:0] == CFG_EX) begin
                df        <= dataflow_t'(cmd.rs1[2]);
                out_act   <= act_t'(cmd.rs1[4:3]);
                out_shift <= cmd.rs1[10:5];
              end
              if (cmd.rs1[1:0] == CFG_IM2COL)
                i2c <= '{en: cmd.rs1[2], in_w: cmd.rs2[15:0], out_w: cmd.rs2[31:16],
                         stride: cmd.rs2[39:32], kh: cmd.rs2[47:40], kw: cmd.rs2[55:48]};
            end
            F_COMPUTE: begin
              a_addr <= cmd.rs1[31:0];
              b_addr <= cmd.rs1[63:32];
              c_addr <= cmd.rs2[31:0];
              state  <= (df == DF_WS) ? S_PRE : S_TR;
            end
            default: ;
          endcase
        end
        S_PRE:       begin k <= last_k ? '0 : k + 1'b1; if (last_k) state <= S_STREAM; end
        S_STREAM:    begin k <= last_k ? '0 : k + 1'b1; if (last_k) state <= S_WAIT; end
        S_TR:        begin k <= last_k ? '0 : k + 1'b1; if (last_k) state <= S_OS_STREAM; end
        S_OS_STREAM: begin k <= last_k ? '0 : k + 1'b1; if (last_k) state <= S_DRAIN; end
        S_DRAIN:     begin k <= last_k ? '0 : k + 1'b1; if (last_k) state <= S_WAIT; end
        S_WAIT:      if (wcnt == (IW+1)'(DIM)) state <= S_DONE;
        S_DONE:      state <= S_IDLE;
        default:     state <= S_IDLE;
      endcase
    end
  end

endmodule
