// tb_tsar_decoder: decodes assembled VEX3 instructions for every register combination of
// TLUT_2x4, TGEMV_8x16, VPADDW, VPSUBW and checks op, operands and the illegal cases
// (odd register pair, TGEMV destination inside its LUT pair, c=4 opcodes, wrong prefix,
// memory form, wrong map/W/L/pp).
`timescale 1ns/1ps
module tb_tsar_decoder;
  import tsar_pkg::*;
  import tsar_tb_pkg::*;
  instr_t instr;
  dec_t   dec;
  int checks = 0, failures = 0;

  tsar_decoder dut (.instr, .dec);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_dec(instr_t i, op_e op, bit ill, int d, int s1, int s2, string what);
    instr = i;
    #1;
    checks++;
    if (dec.illegal !== ill || dec.op !== op ||
        (!ill && (dec.dst !== 4'(d) || dec.src2 !== 4'(s2) ||
                  ((op != OP_TLUT) && dec.src1 !== 4'(s1))))) begin
      failures++;
      $display("FAIL %s: got op=%s ill=%b dst=%0d src1=%0d src2=%0d", what, dec.op.name(),
               dec.illegal, dec.dst, dec.src1, dec.src2);
    end
  endtask

  initial begin
    instr_t t;
    for (int d = 0; d < 16; d++)
      for (int s1 = 0; s1 < 16; s1++)
        for (int s2 = 0; s2 < 16; s2++) begin
          expect_dec(i_tgemv(d, s1, s2), (s1 % 2 == 0 && d/2 != s1/2) ? OP_TGEMV : OP_NONE,
                     !(s1 % 2 == 0 && d/2 != s1/2), d, s1, s2, "TGEMV");
          expect_dec(i_vpaddw(d, s1, s2), OP_VADD, 0, d, s1, s2, "VPADDW");
          expect_dec(i_vpsubw(d, s1, s2), OP_VSUB, 0, d, s1, s2, "VPSUBW");
        end
    for (int d = 0; d < 16; d++)
      for (int s2 = 0; s2 < 16; s2++)
        expect_dec(i_tlut(d, s2), (d % 2 == 0) ? OP_TLUT : OP_NONE, d % 2 != 0, d, 0, s2, "TLUT");
    // YMM8:9 example of the paper: dst field 4'b1000
    t = i_tlut(8, 0);
    expect_dec(t, OP_TLUT, 0, 8, 0, 0, "TLUT YMM8:9");
    checks++;
    if (t.opcode !== 8'h00 || t.modrm[7:6] !== 2'b11 || t.vex1[4:0] !== 5'h04) failures++;
    expect_dec(mk_instr(5'h04, 1, 0, 2'b00, 8'h01, 8, 0, 0), OP_NONE, 1, 0, 0, 0, "TLUT_4x4");
    expect_dec(mk_instr(5'h04, 1, 0, 2'b00, 8'h11, 4, 8, 2), OP_NONE, 1, 0, 0, 0, "TGEMV_16x16");
    expect_dec(mk_instr(5'h04, 0, 0, 2'b00, 8'h00, 8, 0, 0), OP_NONE, 1, 0, 0, 0, "W=0");
    expect_dec(mk_instr(5'h04, 1, 1, 2'b00, 8'h10, 4, 8, 2), OP_NONE, 1, 0, 0, 0, "L=1");
    expect_dec(mk_instr(5'h01, 0, 1, 2'b00, 8'hFD, 4, 8, 2), OP_NONE, 1, 0, 0, 0, "pp=00");
    expect_dec(mk_instr(5'h02, 0, 1, 2'b01, 8'hFD, 4, 8, 2), OP_NONE, 1, 0, 0, 0, "map 0F38");
    t = i_tgemv(4, 8, 2); t.prefix = 8'hC5;
    expect_dec(t, OP_NONE, 1, 0, 0, 0, "VEX2 prefix");
    t = i_tgemv(4, 8, 2); t.modrm[7:6] = 2'b00;
    expect_dec(t, OP_NONE, 1, 0, 0, 0, "memory operand");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
