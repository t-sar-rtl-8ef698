// tsar_simd_slice: the 256-bit SIMD slice with the T-SAR extension (one micro-op per call).
//
// Datapath of one micro-op, all combinational:
//   operand MUX -> 16 x 16-bit SIMD ALUs -> 4 x 4-to-1 adder trees -> 4 accumulate
//   adders -> write-back MUX.
// The ALUs, adder trees and accumulate adders are the slice's existing dot-product
// hardware; T-SAR adds only the operand MUX, the write-back MUX and the control
// (Fig. 6(b)(c), Table 3 of the paper).
//   TLUT micro-op : lanes 0,1 of groups 0,1 compute a1-a2 and a1+a2 (rank 1); lanes 2,3
//                   compute 0-(a1+a2) and 0-(a1-a2) from them (rank 2, chained in the
//                   same cycle as in Fig. 6(b)). Result: 256 bits = two block LUTs.
//   TGEMV micro-op: 16 lanes form D - S per (output, block); each adder tree adds the
//                   s=4 blocks of one output; the accumulate adder adds the old value of
//                   that output lane of dst (fused accumulation). Result: 4 lanes.
//   base op       : lane-wise add/sub of the two sources.
// Inputs: pair = {vreg[src1+1], vreg[src1]} (its low half is src1 for base ops),
// src2, dst_old = vreg[dst]. Outputs: write data and 16-bit lane write mask.
module tsar_simd_slice
  import tsar_pkg::*;
(
  input  op_e              op,
  input  logic [UOP_W-1:0] uop_idx,
  input  vpair_t           pair,
  input  vreg_t            src2,
  input  vreg_t            dst_old,
  output vreg_t            wdata,
  output lane_mask_t       wmask
);
  alu_op_e [LANES-1:0]                alu_op;
  logic [LANES-1:0][LANE_W-1:0]       alu_a, alu_b_mux;
  logic [LANES-1:0][LANE_W-1:0]       alu_y;
  logic [BLK_PER_UOP-1:0][LANE_W-1:0] act_a1, act_a2;
  logic [NUM_ADT-1:0][LANE_W-1:0]     adt_y, acc_old, acc_y;

  tsar_operand_mux u_opmux (
    .op, .uop_idx, .pair, .src2,
    .alu_op, .alu_a, .alu_b(alu_b_mux), .act_a1, .act_a2
  );

  for (genvar g = 0; g < NUM_ADT; g++) begin : g_grp
    // rank 1: lanes 0 and 1 of the group
    logic [1:0][LANE_W-1:0] y_r1, y_r2;
    logic [LANE_W-1:0]      b_r2_0, b_r2_1;

    tsar_simd_alu u_alu0 (.op(alu_op[S*g+0]), .a(alu_a[S*g+0]), .b(alu_b_mux[S*g+0]), .y(y_r1[0]));
    tsar_simd_alu u_alu1 (.op(alu_op[S*g+1]), .a(alu_a[S*g+1]), .b(alu_b_mux[S*g+1]), .y(y_r1[1]));

    // rank 2: in TLUT mode the B operand is the rank-1 result (negation chain)
    assign b_r2_0 = (op == OP_TLUT) ? y_r1[1] : alu_b_mux[S*g+2];
    assign b_r2_1 = (op == OP_TLUT) ? y_r1[0] : alu_b_mux[S*g+3];

    tsar_simd_alu u_alu2 (.op(alu_op[S*g+2]), .a(alu_a[S*g+2]), .b(b_r2_0), .y(y_r2[0]));
    tsar_simd_alu u_alu3 (.op(alu_op[S*g+3]), .a(alu_a[S*g+3]), .b(b_r2_1), .y(y_r2[1]));

    assign alu_y[S*g+0] = y_r1[0];
    assign alu_y[S*g+1] = y_r1[1];
    assign alu_y[S*g+2] = y_r2[0];
    assign alu_y[S*g+3] = y_r2[1];

    // s-to-1 dot-product adder tree of this group
    tsar_adder_tree #(.N(S), .W(LANE_W)) u_adt (
      .in ({y_r2[1], y_r2[0], y_r1[1], y_r1[0]}),
      .sum(adt_y[g])
    );

    // fused accumulation into output lane j = 4u+g of dst
    assign acc_old[g] = dst_old[LANE_W*(int'(uop_idx)*OUT_PER_UOP + g) +: LANE_W];
    tsar_simd_alu u_acc (.op(ALU_ADD), .a(acc_old[g]), .b(adt_y[g]), .y(acc_y[g]));
  end

  tsar_writeback_mux u_wbmux (
    .op, .uop_idx, .alu_y, .acc_y, .act_a1, .act_a2, .wdata, .wmask
  );
endmodule
