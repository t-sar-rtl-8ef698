// tsar_decoder: combinational VEX3 decoder for the T-SAR and base word instructions.
//
// Input is one register-form instruction: C4 prefix, VEX byte 1, VEX byte 2, opcode and
// ModR/M (mod must be 2'b11). Field placement follows Fig. 6(d) of the paper and the
// standard VEX3 format it says it uses: VEX1 = {~R, ~X, ~B, map[4:0]},
// VEX2 = {W, ~vvvv, L, pp}, ModR/M = {mod, reg, rm}. dst = {R, reg}, src1 = vvvv,
// src2 = {B, rm}. As in standard VEX, R, B and vvvv are stored inverted; this is this
// design's reading of "standard VEX3 fields" (the figure only names the fields).
//   map 5'h04, W=1, L=0, pp=00 (the printed 1 / 3'h0):
//     8'h00 TLUT_2x4   dst pair <- LUTs of src2 (XMM, 8 x int8)
//     8'h10 TGEMV_8x16 dst += GEMV(LUT pair src1:src1+1, weights src2)
//     8'h01 TLUT_4x4, 8'h11 TGEMV_16x16: opcodes of the c=4 variant, which this c=2
//     datapath does not implement; they decode as illegal.
//   map 5'h01 (0F), L=1, pp=01 (66): 8'hFD VPADDW, 8'hF9 VPSUBW (base ALU use).
// Register-pair operands must start on an even register (this design's rule; the paper
// gives YMM8:9 as its example). A TGEMV whose dst overlaps its LUT pair is illegal,
// because later micro-ops would read tables already overwritten.
// Timing: purely combinational.
module tsar_decoder
  import tsar_pkg::*;
(
  input  instr_t instr,
  output dec_t   dec
);
  logic       r_bit, b_bit, w_bit, l_bit;
  logic [4:0] map;
  logic [1:0] pp;
  vaddr_t     vvvv;

  always_comb begin
    r_bit = ~instr.vex1[7];
    b_bit = ~instr.vex1[5];
    map   = instr.vex1[4:0];
    w_bit = instr.vex2[7];
    vvvv  = ~instr.vex2[6:3];
    l_bit = instr.vex2[2];
    pp    = instr.vex2[1:0];

    dec.op      = OP_NONE;
    dec.illegal = 1'b1;
    dec.dst     = {r_bit, instr.modrm[5:3]};
    dec.src1    = vvvv;
    dec.src2    = {b_bit, instr.modrm[2:0]};

    if (instr.prefix == VEX3_PREFIX && instr.modrm[7:6] == 2'b11) begin
      if (map == MAP_TSAR && w_bit && !l_bit && pp == 2'b00) begin
        unique case (instr.opcode)
          OPC_TLUT_2X4: begin
            dec.op      = OP_TLUT;
            dec.illegal = dec.dst[0];
          end
          OPC_TGEMV_8X16: begin
            dec.op      = OP_TGEMV;
            dec.illegal = dec.src1[0] || (dec.dst[VREG_AW-1:1] == dec.src1[VREG_AW-1:1]);
          end
          default: ;
        endcase
      end else if (map == MAP_0F && l_bit && pp == 2'b01) begin
        unique case (instr.opcode)
          OPC_VPADDW: begin dec.op = OP_VADD; dec.illegal = 1'b0; end
          OPC_VPSUBW: begin dec.op = OP_VSUB; dec.illegal = 1'b0; end
          default: ;
        endcase
      end
    end
    if (dec.illegal) dec.op = OP_NONE;
  end
endmodule
