// tb_tsar_writeback_mux: checks the write data and lane mask for base, TLUT and TGEMV
// micro-ops: base passes all ALU lanes; TLUT packs, per block, the entries
// {-a1-a2, -a1+a2, a1-a2, a1+a2, 0, a2, a1, a1+a2} from ALU lanes 2,3,0,1, the operand
// bus and lane 1 into 128 bits; TGEMV places the four accumulated outputs into lanes
// 4u..4u+3 and enables only those lanes; no op writes nothing.
`timescale 1ns/1ps
module tb_tsar_writeback_mux;
  import tsar_pkg::*;
  op_e               op;
  logic [1:0]        uop_idx;
  logic [15:0][15:0] alu_y;
  logic [3:0][15:0]  acc_y;
  logic [1:0][15:0]  act_a1, act_a2;
  vreg_t             wdata;
  lane_mask_t        wmask;
  int checks = 0, failures = 0;

  tsar_writeback_mux dut (.*);

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

  initial begin
    for (int t = 0; t < 500; t++) begin
      foreach (alu_y[l]) alu_y[l] = 16'($urandom);
      foreach (acc_y[g]) acc_y[g] = 16'($urandom);
      foreach (act_a1[g]) begin act_a1[g] = 16'($urandom); act_a2[g] = 16'($urandom); end
      uop_idx = 2'($urandom);
      op = OP_VADD; #1;
      chk(wdata == vreg_t'(alu_y) && wmask == '1, "base");
      op = OP_NONE; #1;
      chk(wmask == '0, "no op");
      op = OP_TLUT; #1;
      chk(wmask == '1, "TLUT mask");
      for (int g = 0; g < 2; g++) begin
        logic [15:0] e [8];
        e = '{alu_y[4*g+2], alu_y[4*g+3], alu_y[4*g], alu_y[4*g+1],
              16'd0, act_a2[g], act_a1[g], alu_y[4*g+1]};
        for (int i = 0; i < 8; i++)
          chk(wdata[128*g + 16*i +: 16] == e[i], $sformatf("TLUT group %0d entry %0d", g, i));
      end
      op = OP_TGEMV; #1;
      for (int l = 0; l < 16; l++) begin
        automatic bit mine = (l / 4) == int'(uop_idx);
        chk(wmask[l] == mine, "TGEMV mask");
        if (mine) chk(wdata[16*l +: 16] == acc_y[l % 4], "TGEMV lane data");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
