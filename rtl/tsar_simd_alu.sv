// tsar_simd_alu: one 16-bit SIMD ALU lane (add / subtract, two's-complement wrap).
//
// The slice has 16 of these. Base vector instructions use them lane by lane; TLUT uses
// them to form the +/- activation sums of the dense LUT, TGEMV to take the difference
// dense-entry minus sparse-entry of each block. The paper only names the ALUs; that an
// add/subtract lane is enough for both T-SAR instructions follows Fig. 6(b)(c).
// ALU_NOP outputs zero so that idle lanes do not toggle. Combinational.
module tsar_simd_alu
  import tsar_pkg::*;
#(
  parameter int unsigned W = LANE_W
) (
  input  alu_op_e        op,
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  output logic [W-1:0]   y
);
  always_comb begin
    unique case (op)
      ALU_ADD: y = a + b;
      ALU_SUB: y = a - b;
      default: y = '0;
    endcase
  end
endmodule
