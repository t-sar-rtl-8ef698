// tsar_pkg: constants, encodings and types shared by the ternary LUT SIMD unit.
//
// The unit extends a 256-bit AVX2-style SIMD slice (16 lanes of 16 bits) with two
// instructions. TLUT_2x4 turns eight int8 activations into four in-register lookup
// tables, one per block of c=2 activations. Each table holds 2^(c+1)=8 int16 entries:
// a "dense" half (every +/- sign combination of the two activations) and a "sparse"
// half (every subset sum). TGEMV_8x16 then evaluates a (1,8)x(8,16) ternary GEMV from
// those tables and 2-bit-per-weight encoded weights, accumulating into 16 int16 lanes.
//
// Configuration c=2, s=4, k=8, m=16, 16-bit ALUs, 4-to-1 adder trees and the VEX3
// opcodes follow the paper. The bit layout of tables and weights inside a register,
// the base opcodes and the micro-op/pipeline timing are this design's own choices and
// are documented next to each constant below.
package tsar_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned VLEN      = 256;            // YMM register width
  localparam int unsigned LANE_W    = 16;             // SIMD ALU width (int16)
  localparam int unsigned LANES     = VLEN / LANE_W;  // 16 SIMD ALUs
  localparam int unsigned ACT_W     = 8;              // int8 activations
  localparam int unsigned NUM_VREGS = 16;             // YMM0..YMM15
  localparam int unsigned VREG_AW   = 4;

  // T-SAR configuration (c, s, k = c*s, m)
  localparam int unsigned C = 2;
  localparam int unsigned S = 4;
  localparam int unsigned K = C * S;                  // 8 input channels / instruction
  localparam int unsigned M = 16;                     // 16 output channels / instruction

  localparam int unsigned LUT_HALF    = 1 << C;                  // 4 entries per binary LUT
  localparam int unsigned LUT_ENTRIES = 2 * LUT_HALF;            // 2^(c+1) = 8
  localparam int unsigned LUT_BITS    = LUT_ENTRIES * LANE_W;    // 128 bits per block
  localparam int unsigned TLUT_UOPS   = (S * LUT_BITS) / VLEN;   // 2 micro-ops, 256 b each
  localparam int unsigned BLK_PER_UOP = S / TLUT_UOPS;           // 2 blocks per TLUT uop

  localparam int unsigned NUM_ADT      = LANES / S;              // 4 adder trees (s-to-1)
  localparam int unsigned OUT_PER_UOP  = NUM_ADT;                // 4 outputs per TGEMV uop
  localparam int unsigned TGEMV_UOPS   = M / OUT_PER_UOP;        // 4 micro-ops
  localparam int unsigned W_BITS       = 2 * K;                  // 16 weight bits per output
  localparam int unsigned UOP_W        = 2;

  // ---------------------------------------------------------------- encoding
  // VEX3 prefix byte and the opcode map used by the T-SAR instructions (Fig. 6(d)).
  localparam logic [7:0] VEX3_PREFIX = 8'hC4;
  localparam logic [4:0] MAP_TSAR    = 5'h04;
  localparam logic [4:0] MAP_0F      = 5'h01;

  localparam logic [7:0] OPC_TLUT_2X4    = 8'h00;
  localparam logic [7:0] OPC_TLUT_4X4    = 8'h01;
  localparam logic [7:0] OPC_TGEMV_8X16  = 8'h10;
  localparam logic [7:0] OPC_TGEMV_16X16 = 8'h11;
  // Base AVX2 word add/subtract (VEX.256.66.0F FD / F9), the ALUs' ordinary use.
  localparam logic [7:0] OPC_VPADDW      = 8'hFD;
  localparam logic [7:0] OPC_VPSUBW      = 8'hF9;

  typedef logic [VLEN-1:0]       vreg_t;
  typedef logic [2*VLEN-1:0]     vpair_t;
  typedef logic [LANES-1:0]      lane_mask_t;
  typedef logic [VREG_AW-1:0]    vaddr_t;
  typedef logic [LANE_W-1:0]     lane_t;

  typedef enum logic [2:0] {
    OP_NONE  = 3'd0,
    OP_VADD  = 3'd1,
    OP_VSUB  = 3'd2,
    OP_TLUT  = 3'd3,
    OP_TGEMV = 3'd4
  } op_e;

  typedef enum logic [1:0] {
    ALU_ADD  = 2'd0,
    ALU_SUB  = 2'd1,
    ALU_NOP  = 2'd2
  } alu_op_e;

  // Raw instruction: VEX3 prefix, two VEX payload bytes, opcode, ModR/M.
  typedef struct packed {
    logic [7:0] prefix;
    logic [7:0] vex1;
    logic [7:0] vex2;
    logic [7:0] opcode;
    logic [7:0] modrm;
  } instr_t;

  typedef struct packed {
    logic   illegal;   // not a supported instruction in this configuration
    op_e    op;
    vaddr_t dst;
    vaddr_t src1;      // VEX.vvvv
    vaddr_t src2;      // ModR/M.rm with VEX.B
  } dec_t;

  typedef struct packed {
    op_e              op;
    logic [UOP_W-1:0] idx;     // micro-op number within the instruction
    logic             last;
    logic             tag;     // toggles per instruction (scoreboard)
    vaddr_t           dst;
    vaddr_t           src1;
    vaddr_t           src2;
  } uop_t;

  function automatic int unsigned num_uops(op_e op);
    case (op)
      OP_TLUT:  return TLUT_UOPS;
      OP_TGEMV: return TGEMV_UOPS;
      default:  return 1;
    endcase
  endfunction

  // Weight encoding (compile-time step of the paper, Fig. 4/5): a ternary weight w
  // becomes a dense bit (1: +1, 0: -1; a zero weight is encoded as +1) and a sparse bit
  // (1 when w == 0). Per output channel the 16 weight bits are laid out as
  //   [2b+1:2b]   dense LUT index of block b  (bit 2b+1 <- first activation of block)
  //   [8+2b+1:8+2b] sparse LUT index of block b
  function automatic logic dense_bit(int w);
    return (w >= 0);
  endfunction

  function automatic logic sparse_bit(int w);
    return (w == 0);
  endfunction

endpackage
