// tb_tsar_adder_tree: checks the 4-to-1 (default) and an 8-to-1 adder tree against a
// plain sum modulo 2^16, on random and extreme inputs.
`timescale 1ns/1ps
module tb_tsar_adder_tree;
  logic [3:0][15:0] in4;
  logic [7:0][15:0] in8;
  logic [15:0]      s4, s8;
  int checks = 0, failures = 0;

  tsar_adder_tree                   dut4 (.in(in4), .sum(s4));
  tsar_adder_tree #(.N(8), .W(16))  dut8 (.in(in8), .sum(s8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      int e4, e8;
      e4 = 0; e8 = 0;
      for (int i = 0; i < 4; i++) begin
        in4[i] = (t < 3) ? 16'h7fff : 16'($urandom);
        e4 += int'(in4[i]);
      end
      for (int i = 0; i < 8; i++) begin
        in8[i] = (t < 3) ? 16'h8000 : 16'($urandom);
        e8 += int'(in8[i]);
      end
      #1;
      checks += 2;
      if (s4 !== 16'(e4)) begin failures++; $display("FAIL 4-to-1 %h want %h", s4, 16'(e4)); end
      if (s8 !== 16'(e8)) begin failures++; $display("FAIL 8-to-1 %h want %h", s8, 16'(e8)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
