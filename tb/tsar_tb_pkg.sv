// tsar_tb_pkg: reference models and helpers shared by the testbenches.
//
// The reference models work from the mathematical definitions, not from the RTL's
// structure: a ternary GEMV output is sum_i w_i * a_i computed directly, and a LUT entry
// is the sum of the signed (dense) or selected (sparse) activations its index denotes.
// Also: ternary weight encoding into the register layout, and VEX3 instruction
// assembly (R, B and vvvv stored inverted, as in standard VEX).
package tsar_tb_pkg;
  import tsar_pkg::*;

  typedef logic signed [15:0] s16_t;

  // random int8 and ternary values
  function automatic logic [7:0] rand_act();
    return 8'($urandom);
  endfunction

  function automatic int rand_tern();
    return int'($urandom_range(0, 2)) - 1;
  endfunction

  // sign-extended activation byte i of a register
  function automatic int act_of(vreg_t r, int i);
    return int'($signed(r[8*i +: 8]));
  endfunction

  // reference LUT pair for TLUT_2x4 of the activations in the low 64 bits of x
  function automatic vpair_t ref_tlut(vreg_t x);
    vpair_t p = '0;
    for (int b = 0; b < S; b++) begin
      int a1 = act_of(x, 2*b);
      int a2 = act_of(x, 2*b + 1);
      for (int e = 0; e < 4; e++) begin
        int d = (e[1] ? a1 : -a1) + (e[0] ? a2 : -a2);
        int s = (e[1] ? a1 : 0) + (e[0] ? a2 : 0);
        p[128*b + 16*e       +: 16] = 16'(d);
        p[128*b + 16*(4 + e) +: 16] = 16'(s);
      end
    end
    return p;
  endfunction

  // weight register for output channels 0..15 from a ternary matrix w[j][i], i = 0..7
  function automatic vreg_t encode_weights(int w[16][8]);
    vreg_t r = '0;
    for (int j = 0; j < 16; j++)
      for (int b = 0; b < 4; b++) begin
        // bit 2b+1 <- first activation of the block, bit 2b <- second
        r[16*j + 2*b + 1]     = dense_bit(w[j][2*b]);
        r[16*j + 2*b]         = dense_bit(w[j][2*b + 1]);
        r[16*j + 8 + 2*b + 1] = sparse_bit(w[j][2*b]);
        r[16*j + 8 + 2*b]     = sparse_bit(w[j][2*b + 1]);
      end
    return r;
  endfunction

  // reference (1,8)x(8,16) ternary GEMV with int16 accumulation (wrap-around)
  function automatic vreg_t ref_tgemv(vreg_t x, int w[16][8], vreg_t acc);
    vreg_t r;
    for (int j = 0; j < 16; j++) begin
      int y = int'($signed(acc[16*j +: 16]));
      for (int i = 0; i < 8; i++) y += w[j][i] * act_of(x, i);
      r[16*j +: 16] = 16'(y);
    end
    return r;
  endfunction

  function automatic instr_t mk_instr(logic [4:0] map, logic w, logic l, logic [1:0] pp,
                                      logic [7:0] opc, int dst, int src1, int src2);
    instr_t in;
    logic [3:0] d = 4'(dst), s1 = 4'(src1), s2 = 4'(src2);
    in.prefix = 8'hC4;
    in.vex1   = {~d[3], 1'b1, ~s2[3], map};
    in.vex2   = {w, ~s1, l, pp};
    in.opcode = opc;
    in.modrm  = {2'b11, d[2:0], s2[2:0]};
    return in;
  endfunction

  function automatic instr_t i_tlut(int dst, int src);
    return mk_instr(5'h04, 1'b1, 1'b0, 2'b00, 8'h00, dst, 0, src);
  endfunction
  function automatic instr_t i_tgemv(int dst, int lut, int wts);
    return mk_instr(5'h04, 1'b1, 1'b0, 2'b00, 8'h10, dst, lut, wts);
  endfunction
  function automatic instr_t i_vpaddw(int dst, int a, int b);
    return mk_instr(5'h01, 1'b0, 1'b1, 2'b01, 8'hFD, dst, a, b);
  endfunction
  function automatic instr_t i_vpsubw(int dst, int a, int b);
    return mk_instr(5'h01, 1'b0, 1'b1, 2'b01, 8'hF9, dst, a, b);
  endfunction
endpackage
