// tsar_operand_mux: the operand bus and input MUXes in front of the 16 SIMD ALUs.
//
// This is the "operand-bus wires and input MUX" the T-SAR extension adds to a SIMD
// slice. It decides, per micro-op, what each ALU lane computes. The 16 lanes form
// NUM_ADT=4 groups of S=4 lanes, one group per 4-to-1 adder tree.
//   base VPADDW/VPSUBW : lane i gets word i of src1 and src2.
//   TLUT micro-op u    : group g (g < 2) builds the LUT of block b = 2u+g from the int8
//                        activations a1 = byte 2b, a2 = byte 2b+1 of src2 (sign-extended):
//                        lane 0: a1-a2, lane 1: a1+a2, lanes 2/3: 0 - (lane 1 / lane 0),
//                        the negations chained on lanes 0/1 as drawn in Fig. 6(b). The
//                        chaining itself (using the rank-1 result as B) is done in the slice;
//                        this block only drives A=0 and the SUB operation for lanes 2/3.
//                        a1 and a2 are also sent out on the operand bus for the sparse
//                        entries 0, a2, a1 that need no ALU.
//   TGEMV micro-op u   : group g serves output channel j = 4u+g. Lane b of the group
//                        selects, with the 2 dense weight bits of block b, a dense entry
//                        and, with the 2 sparse bits, a sparse entry of block b's LUT, and
//                        subtracts them (D - S), Fig. 6(c).
// Register layout (this design's choice; the paper gives sizes only): LUT of block b =
// bits [128b +: 128] of the register pair {src1+1, src1}; entry e at [16e +: 16],
// e = 0..3 dense (index {s(a1), s(a2)}, 1 = +), e = 4..7 sparse (index {a1 in, a2 in}).
// Weights of output j = src2[16j +: 16]: dense index of block b at [2b +: 2], sparse
// index at [8+2b +: 2]. Combinational; written for c = 2.
module tsar_operand_mux
  import tsar_pkg::*;
(
  input  op_e                               op,
  input  logic [UOP_W-1:0]                  uop_idx,
  input  vpair_t                            pair,      // {vreg[src1+1], vreg[src1]}
  input  vreg_t                             src2,
  output alu_op_e [LANES-1:0]               alu_op,
  output logic [LANES-1:0][LANE_W-1:0]      alu_a,
  output logic [LANES-1:0][LANE_W-1:0]      alu_b,
  output logic [BLK_PER_UOP-1:0][LANE_W-1:0] act_a1,   // sign-extended activations
  output logic [BLK_PER_UOP-1:0][LANE_W-1:0] act_a2
);
  initial assert (C == 2 && S == 4) else $error("operand routing is written for c=2, s=4");

  int unsigned         blk, j;
  logic [ACT_W-1:0]    a1, a2;
  logic [W_BITS-1:0]   w;
  logic [LUT_BITS-1:0] lut;
  logic [C-1:0]        didx, sidx;

  always_comb begin
    blk = 0; j = 0; a1 = '0; a2 = '0; w = '0; lut = '0; didx = '0; sidx = '0;
    alu_op = {LANES{ALU_NOP}};
    alu_a  = '0;
    alu_b  = '0;
    act_a1 = '0;
    act_a2 = '0;

    unique case (op)
      OP_VADD, OP_VSUB: begin
        for (int i = 0; i < LANES; i++) begin
          alu_op[i] = (op == OP_VADD) ? ALU_ADD : ALU_SUB;
          alu_a[i]  = pair[LANE_W*i +: LANE_W];
          alu_b[i]  = src2[LANE_W*i +: LANE_W];
        end
      end

      OP_TLUT: begin
        for (int g = 0; g < BLK_PER_UOP; g++) begin
          blk = int'(uop_idx) * BLK_PER_UOP + g;
          a1  = src2[ACT_W*(C*blk)     +: ACT_W];
          a2  = src2[ACT_W*(C*blk + 1) +: ACT_W];
          act_a1[g] = {{(LANE_W-ACT_W){a1[ACT_W-1]}}, a1};
          act_a2[g] = {{(LANE_W-ACT_W){a2[ACT_W-1]}}, a2};
          alu_op[S*g+0] = ALU_SUB; alu_a[S*g+0] = act_a1[g]; alu_b[S*g+0] = act_a2[g];
          alu_op[S*g+1] = ALU_ADD; alu_a[S*g+1] = act_a1[g]; alu_b[S*g+1] = act_a2[g];
          alu_op[S*g+2] = ALU_SUB; alu_a[S*g+2] = '0;        // B chained from lane 1
          alu_op[S*g+3] = ALU_SUB; alu_a[S*g+3] = '0;        // B chained from lane 0
        end
      end

      OP_TGEMV: begin
        for (int g = 0; g < NUM_ADT; g++) begin
          j = int'(uop_idx) * OUT_PER_UOP + g;
          w = src2[W_BITS*j +: W_BITS];
          for (int b = 0; b < S; b++) begin
            lut  = pair[LUT_BITS*b +: LUT_BITS];
            didx = w[C*b +: C];
            sidx = w[K + C*b +: C];
            alu_op[S*g+b] = ALU_SUB;
            alu_a[S*g+b]  = lut[LANE_W*int'(didx) +: LANE_W];
            alu_b[S*g+b]  = lut[LANE_W*(LUT_HALF + int'(sidx)) +: LANE_W];
          end
        end
      end

      default: ;
    endcase
  end
endmodule
