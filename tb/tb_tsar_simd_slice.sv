// tb_tsar_simd_slice: one micro-op at a time through the whole slice datapath.
// TLUT micro-ops 0 and 1 must produce the two halves of the reference LUT pair; the four
// TGEMV micro-ops, fed the reference LUTs, encoded ternary weights and a random
// accumulator, must produce the reference GEMV result in lanes 4u..4u+3; base add/sub
// are checked lane by lane. References come from tsar_tb_pkg.
`timescale 1ns/1ps
module tb_tsar_simd_slice;
  import tsar_pkg::*;
  import tsar_tb_pkg::*;
  op_e        op;
  logic [1:0] uop_idx;
  vpair_t     pair;
  vreg_t      src2, dst_old, wdata;
  lane_mask_t wmask;
  int checks = 0, failures = 0;
  int w[16][8];

  tsar_simd_slice dut (.*);

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic vreg_t rv();
    vreg_t v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int t = 0; t < 300; t++) begin
      vreg_t x, acc, expv, res;
      vpair_t lut;
      x = rv();
      if (t == 0) x[63:0] = {8{8'h80}};        // most negative activations
      if (t == 1) x[63:0] = {8{8'h7f}};
      lut = ref_tlut(x);
      // TLUT
      op = OP_TLUT; src2 = x; pair = {rv(), rv()}; dst_old = rv();
      for (int u = 0; u < 2; u++) begin
        uop_idx = 2'(u); #1;
        chk(wmask == '1, "TLUT mask");
        chk(wdata == lut[256*u +: 256], $sformatf("TLUT uop %0d", u));
      end
      // TGEMV
      foreach (w[j, i]) w[j][i] = (t == 0) ? -1 : (t == 1) ? 1 : rand_tern();
      acc = rv();
      expv = ref_tgemv(x, w, acc);
      op = OP_TGEMV; pair = lut; src2 = encode_weights(w); dst_old = acc;
      res = acc;
      for (int u = 0; u < 4; u++) begin
        uop_idx = 2'(u); #1;
        for (int l = 0; l < 16; l++) begin
          chk(wmask[l] == (l / 4 == u), "TGEMV mask");
          if (wmask[l]) res[16*l +: 16] = wdata[16*l +: 16];
        end
      end
      chk(res == expv, "TGEMV result");
      // base
      pair = {rv(), rv()}; src2 = rv(); uop_idx = 0;
      op = OP_VADD; #1;
      for (int l = 0; l < 16; l++) chk(wdata[16*l +: 16] == 16'(pair[16*l +: 16] + src2[16*l +: 16]), "VPADDW");
      op = OP_VSUB; #1;
      for (int l = 0; l < 16; l++) chk(wdata[16*l +: 16] == 16'(pair[16*l +: 16] - src2[16*l +: 16]), "VPSUBW");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
