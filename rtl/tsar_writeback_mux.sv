// tsar_writeback_mux: the 256-bit write-back MUX in front of the register-file write port.
//
// The T-SAR extension adds this MUX so that TLUT words and TGEMV results, not only plain
// lane-wise ALU results, can be written back (Table "write-back MUX" of the paper).
// It also produces a per-lane write enable, because a TGEMV micro-op only owns four of the
// sixteen 16-bit lanes of its destination.
//   base     : all lanes <- ALU results.
//   TLUT  u  : 128-bit LUT of group g at bits [128g +: 128], entries e0..e7 =
//              { -a1-a2, -a1+a2, a1-a2, a1+a2 | 0, a2, a1, a1+a2 } (Fig. 6(b) order),
//              taken from ALU lanes 2,3,0,1, the operand bus, and lane 1 again. All lanes.
//   TGEMV u  : lanes 4u..4u+3 <- accumulated outputs of adder trees 0..3.
// The layout of entries inside the register is this design's choice. Combinational.
module tsar_writeback_mux
  import tsar_pkg::*;
(
  input  op_e                                op,
  input  logic [UOP_W-1:0]                   uop_idx,
  input  logic [LANES-1:0][LANE_W-1:0]       alu_y,
  input  logic [NUM_ADT-1:0][LANE_W-1:0]     acc_y,
  input  logic [BLK_PER_UOP-1:0][LANE_W-1:0] act_a1,
  input  logic [BLK_PER_UOP-1:0][LANE_W-1:0] act_a2,
  output vreg_t                              wdata,
  output lane_mask_t                         wmask
);
  int unsigned j;

  always_comb begin
    j     = 0;
    wdata = '0;
    wmask = '0;
    unique case (op)
      OP_VADD, OP_VSUB: begin
        wdata = alu_y;
        wmask = '1;
      end
      OP_TLUT: begin
        for (int g = 0; g < BLK_PER_UOP; g++) begin
          wdata[LUT_BITS*g +: LUT_BITS] = {
            alu_y[S*g+1],      // e7 sparse 11: a1+a2
            act_a1[g],         // e6 sparse 10: a1
            act_a2[g],         // e5 sparse 01: a2
            {LANE_W{1'b0}},    // e4 sparse 00: 0
            alu_y[S*g+1],      // e3 dense 11: +a1+a2
            alu_y[S*g+0],      // e2 dense 10: +a1-a2
            alu_y[S*g+3],      // e1 dense 01: -a1+a2
            alu_y[S*g+2]       // e0 dense 00: -a1-a2
          };
        end
        wmask = '1;
      end
      OP_TGEMV: begin
        for (int g = 0; g < NUM_ADT; g++) begin
          j = int'(uop_idx) * OUT_PER_UOP + g;
          wdata[LANE_W*j +: LANE_W] = acc_y[g];
          wmask[j] = 1'b1;
        end
      end
      default: ;
    endcase
  end
endmodule
