// tb_tsar_operand_mux: checks the ALU operand routing for every micro-op type.
// Base ops: lane-wise operands. TLUT: the rank-1 lanes see the two activations of the
// right block, the rank-2 lanes subtract from zero, unused groups are idle. TGEMV: with
// LUTs built by the reference model, each lane's (A - B) must equal the ternary partial
// dot product of its block, and A alone the dense (+/-) sum, computed from the weights.
`timescale 1ns/1ps
module tb_tsar_operand_mux;
  import tsar_pkg::*;
  import tsar_tb_pkg::*;
  op_e              op;
  logic [1:0]       uop_idx;
  vpair_t           pair;
  vreg_t            src2;
  alu_op_e [15:0]   alu_op;
  logic [15:0][15:0] alu_a, alu_b;
  logic [1:0][15:0] act_a1, act_a2;
  int checks = 0, failures = 0;
  int w[16][8];

  tsar_operand_mux dut (.*);

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
      vreg_t x;
      // ---- base
      pair = {rv(), rv()}; src2 = rv(); uop_idx = 0;
      op = (t % 2) ? OP_VADD : OP_VSUB;
      #1;
      for (int l = 0; l < 16; l++)
        chk(alu_op[l] == ((op == OP_VADD) ? ALU_ADD : ALU_SUB) &&
            alu_a[l] == pair[16*l +: 16] && alu_b[l] == src2[16*l +: 16], "base lane");
      // ---- TLUT
      x = rv(); src2 = x; op = OP_TLUT;
      for (int u = 0; u < 2; u++) begin
        uop_idx = 2'(u);
        #1;
        for (int g = 0; g < 2; g++) begin
          automatic int b = 2*u + g;
          automatic int a1 = act_of(x, 2*b), a2 = act_of(x, 2*b + 1);
          chk(act_a1[g] == 16'(a1) && act_a2[g] == 16'(a2), "TLUT operand bus");
          chk(alu_op[4*g] == ALU_SUB && alu_a[4*g] == 16'(a1) && alu_b[4*g] == 16'(a2), "TLUT a1-a2");
          chk(alu_op[4*g+1] == ALU_ADD && alu_a[4*g+1] == 16'(a1) && alu_b[4*g+1] == 16'(a2), "TLUT a1+a2");
          chk(alu_op[4*g+2] == ALU_SUB && alu_a[4*g+2] == 0, "TLUT negate 1");
          chk(alu_op[4*g+3] == ALU_SUB && alu_a[4*g+3] == 0, "TLUT negate 2");
        end
        for (int l = 8; l < 16; l++) chk(alu_op[l] == ALU_NOP, "TLUT idle lanes");
      end
      // ---- TGEMV
      x = rv();
      foreach (w[j, i]) w[j][i] = rand_tern();
      pair = ref_tlut(x); src2 = encode_weights(w); op = OP_TGEMV;
      for (int u = 0; u < 4; u++) begin
        uop_idx = 2'(u);
        #1;
        for (int g = 0; g < 4; g++)
          for (int b = 0; b < 4; b++) begin
            automatic int j = 4*u + g;
            automatic int part = w[j][2*b] * act_of(x, 2*b) + w[j][2*b+1] * act_of(x, 2*b+1);
            automatic int dense = (w[j][2*b] >= 0 ? 1 : -1) * act_of(x, 2*b) +
                        (w[j][2*b+1] >= 0 ? 1 : -1) * act_of(x, 2*b+1);
            chk(alu_op[4*g+b] == ALU_SUB, "TGEMV op");
            chk(16'(alu_a[4*g+b] - alu_b[4*g+b]) == 16'(part),
                $sformatf("TGEMV D-S u%0d g%0d b%0d", u, g, b));
            chk(alu_a[4*g+b] == 16'(dense), "TGEMV dense entry");
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
