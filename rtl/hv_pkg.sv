// hv_pkg: types and constants shared by the hybrid-ViT accelerator.
// Array size, data widths and memory sizes follow the published configuration
// (16x16 PEs, 8-bit data, 32-bit accumulators, 128-bit bus, 1 kB weight memory per
// PE, 8 kB input memory, 24 kB output register file, 512 kB global SRAM).
// The instruction encoding, the bus request format and the post-processing
// operation codes are this design's own choices.
package hv_pkg;
  localparam int unsigned ROWS    = 16;     // PE rows: input channels (C)
  localparam int unsigned COLS    = 16;     // PE columns: K (C|K) or FX taps (C|FX)
  localparam int unsigned DW      = 8;      // activation / weight width
  localparam int unsigned AW      = 32;     // accumulator width
  localparam int unsigned BUS_W   = 128;    // global bus width
  localparam int unsigned WDEPTH  = 1024;   // 1 kB weight memory per PE
  localparam int unsigned IDEPTH  = 512;    // 8 kB input memory / 16 B
  localparam int unsigned RDEPTH  = 384;    // 24 kB output RF / (16 x 4 B)
  localparam int unsigned GDEPTH  = 32768;  // 512 kB global SRAM / 16 B
  localparam int unsigned LB_BEATS = 16;    // line buffer: 16 beats x 16 channels

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef data_t [ROWS-1:0]     dvec_t;     // 16 x 8 bit
  typedef acc_t  [COLS-1:0]     avec_t;     // 16 x 32 bit

  // Spatial dataflow of the PE array.
  typedef enum logic {MODE_CK = 1'b0, MODE_CFX = 1'b1} mode_e;

  // Address spaces reachable over the global bus.
  typedef enum logic [1:0] {SP_DRAM = 2'd0, SP_GSRAM = 2'd1, SP_ISRAM = 2'd2, SP_WSRAM = 2'd3} space_e;

  // Global bus request (one 128-bit word).
  typedef struct packed {
    logic              we;
    space_e            space;
    logic [21:0]       addr;
    logic [BUS_W-1:0]  wdata;
  } bus_req_t;

  // Non-linear post-processing operations.
  typedef enum logic [2:0] {PP_QUANT = 3'd0, PP_RELU = 3'd1, PP_GELU = 3'd2,
                            PP_LNORM = 3'd3, PP_SMAX = 3'd4} ppop_e;

  typedef struct packed {
    ppop_e               op;
    logic [8:0]          nch;      // valid channels per pixel (1..256)
    logic signed [15:0]  qmul;     // requantisation multiplier
    logic [5:0]          qshift;   // requantisation right shift
    logic [4:0]          gelu_t;   // GELU gate width 2^T
    logic [15:0]         sm_mul;   // SoftMax: log2(e)/scale in 8 fractional bits
  } pp_cfg_t;

  // Instruction opcodes, instr[31:28].
  typedef enum logic [3:0] {OP_NOP = 4'h0, OP_SET = 4'h1, OP_DMA = 4'h2,
                            OP_COMPUTE = 4'h3, OP_WAIT = 4'h4} opcode_e;

  // Register indices for OP_SET, instr[27:22]; value is instr[21:0].
  localparam int unsigned R_DMA_SRC = 0,  R_DMA_DST = 1,  R_DMA_LEN = 2,
                          R_OX = 3,       R_OY = 4,       R_KT = 5,      R_CT = 6,
                          R_FX = 7,       R_FY = 8,       R_STRIDE = 9,
                          R_IN_BASE = 10, R_IN_XSTR = 11, R_IN_YSTR = 12,
                          R_W_BASE = 13,  R_RF_BASE = 14, R_WB_ADDR = 15,
                          R_NCH = 16,     R_QMUL = 17,    R_QSHIFT = 18,
                          R_GELU_T = 19,  R_SM_MUL = 20,  NREGS = 21;

  function automatic data_t sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[7:0];
  endfunction
endpackage
