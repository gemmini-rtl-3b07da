// gemmini_pkg: types and constants shared by the accelerator's modules.
//
// Sizes follow the evaluated configuration: a 16x16 spatial array of 8-bit
// integer multipliers accumulating in 32 bits, a 256 KB scratchpad of 16-byte
// rows and a 64 KB accumulator of 16 x 32-bit rows, a 4-entry private TLB.
// The element widths, the bank count, the command encoding and the local
// address format are this design's own choices.
//
// Local address format (32 bits), used by mvin/mvout/compute operands:
//   bit 31     : 1 = accumulator, 0 = scratchpad
//   bit 30     : accumulate (add into the row) instead of overwrite; accumulator only
//   bits 29:0  : row number
package gemmini_pkg;

  localparam int DIM        = 16;       // PEs per side of the spatial array
  localparam int IN_W       = 8;        // input element width
  localparam int ACC_W      = 32;       // accumulator element width
  localparam int SP_KB      = 256;      // scratchpad capacity
  localparam int SP_BANKS   = 4;
  localparam int ACC_KB     = 64;       // accumulator capacity
  localparam int SCALE_W    = 16;       // matrix-scalar multiplier operand
  localparam int PROD_W     = ACC_W + SCALE_W;
  localparam int LADDR_W    = 32;       // local (scratchpad/accumulator) address
  localparam int VADDR_W    = 39;       // virtual address width
  localparam int PADDR_W    = 32;       // physical address width
  localparam int PG_OFF_W   = 12;       // 4 KiB pages
  localparam int VPN_W      = VADDR_W - PG_OFF_W;
  localparam int PPN_W      = PADDR_W - PG_OFF_W;
  localparam int ROW_BYTES  = DIM * IN_W / 8;

  localparam int LA_ACC_BIT   = 31;
  localparam int LA_ACCUM_BIT = 30;

  // Dataflow of the spatial array, chosen at run time.
  typedef enum logic {DF_OS = 1'b0, DF_WS = 1'b1} dataflow_t;

  // Activation applied on the way out of the accumulator.
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_RELU6 = 2'd2} act_t;

  // Control travelling with each wave of data through the array.
  //   valid : multiply-accumulate this cycle
  //   load  : shift the stationary register along the preload chain
  typedef struct packed {
    logic      valid;
    logic      load;
    dataflow_t df;
  } pe_ctrl_t;

  // Command funct codes (custom RISC-V instruction, RoCC interface).
  typedef enum logic [6:0] {
    F_CONFIG  = 7'd0,
    F_MVIN    = 7'd2,
    F_MVOUT   = 7'd3,
    F_COMPUTE = 7'd4,
    F_FLUSH   = 7'd7
  } funct_t;

  // CONFIG sub-targets, rs1[1:0]
  typedef enum logic [1:0] {
    CFG_EX = 2'd0, CFG_LD = 2'd1, CFG_ST = 2'd2, CFG_IM2COL = 2'd3
  } cfg_t;

  typedef struct packed {
    logic [6:0]  funct;
    logic [63:0] rs1;
    logic [63:0] rs2;
  } rocc_cmd_t;

  // Which unit executes a command.
  typedef enum logic {U_DMA = 1'b0, U_EX = 1'b1} unit_t;

  // Parameters of the on-the-fly im2col generator.
  typedef struct packed {
    logic        en;
    logic [15:0] in_w;    // input image width in pixels
    logic [15:0] out_w;   // output image width in pixels
    logic [7:0]  stride;
    logic [7:0]  kh;      // kernel row offset of this pass
    logic [7:0]  kw;      // kernel column offset of this pass
  } im2col_cfg_t;

endpackage
