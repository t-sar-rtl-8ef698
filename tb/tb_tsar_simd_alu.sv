// tb_tsar_simd_alu: random and corner-case check of one 16-bit ALU lane (add, sub, nop)
// against integer arithmetic modulo 2^16.
`timescale 1ns/1ps
module tb_tsar_simd_alu;
  import tsar_pkg::*;
  alu_op_e     op;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  tsar_simd_alu dut (.op, .a, .b, .y);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(alu_op_e o, logic [15:0] x, logic [15:0] z);
    logic [15:0] e;
    op = o; a = x; b = z;
    #1;
    e = (o == ALU_ADD) ? 16'(int'(x) + int'(z)) : (o == ALU_SUB) ? 16'(int'(x) - int'(z)) : 16'd0;
    checks++;
    if (y !== e) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h y=%h want %h", o.name(), x, z, y, e);
    end
  endtask

  initial begin
    one(ALU_ADD, 16'h7fff, 16'h0001);
    one(ALU_SUB, 16'h8000, 16'h0001);
    one(ALU_SUB, 16'h0000, 16'h0005);
    one(ALU_NOP, 16'h1234, 16'h4321);
    for (int i = 0; i < 2000; i++)
      one(alu_op_e'($urandom_range(0, 2)), 16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
