// tb_tsar_uop_sequencer: drives decoded instructions into the sequencer, models the
// one-cycle write-back stage, and checks the issued micro-op stream: 2 micro-ops for
// TLUT (destinations dst, dst+1), 4 for TGEMV (index 0..3), 1 for a base op; no bubble
// between independent instructions; exactly one stall cycle when an instruction reads a
// register the previous instruction's last micro-op is still writing back; an illegal
// instruction gives one `illegal` pulse and no micro-op.
`timescale 1ns/1ps
module tb_tsar_uop_sequencer;
  import tsar_pkg::*;
  logic   clk = 0, rst_n = 0;
  logic   in_valid = 0, in_ready;
  dec_t   in_dec = '0;
  logic   wb_valid = 0, wb_tag = 0;
  vaddr_t wb_dst = '0;
  logic   uop_valid, stall, illegal, busy;
  uop_t   uop;
  int checks = 0, failures = 0;
  int n_stall = 0, n_illegal = 0;
  uop_t issued [$];
  longint cyc = 0, first_issue = -1, last_issue = -1;

  tsar_uop_sequencer dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    wb_valid <= uop_valid;
    if (uop_valid) begin
      wb_dst <= uop.dst; wb_tag <= uop.tag;
      issued.push_back(uop);
      if (first_issue < 0) first_issue = cyc;
      last_issue = cyc;
    end
    if (stall) n_stall++;
    if (illegal) n_illegal++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic dec_t mk(op_e op, int d, int s1, int s2, bit ill = 0);
    dec_t x;
    x.illegal = ill; x.op = ill ? OP_NONE : op;
    x.dst = 4'(d); x.src1 = 4'(s1); x.src2 = 4'(s2);
    return x;
  endfunction

  task automatic send(dec_t d);
    @(negedge clk);
    in_valid = 1; in_dec = d;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
  endtask

  task automatic idle();
    @(negedge clk);
    in_valid = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  // run a sequence and check stream, span and stalls
  task automatic run(dec_t seq [$], int exp_uops, int exp_stalls, int exp_span, string what);
    int s0 = n_stall;
    issued.delete(); first_issue = -1;
    foreach (seq[i]) send(seq[i]);
    idle();
    chk(issued.size() == exp_uops, $sformatf("%s: %0d micro-ops, want %0d", what, issued.size(), exp_uops));
    chk(n_stall - s0 == exp_stalls, $sformatf("%s: %0d stalls, want %0d", what, n_stall - s0, exp_stalls));
    if (exp_span > 0)
      chk(last_issue - first_issue + 1 == exp_span,
          $sformatf("%s: span %0d cycles, want %0d", what, last_issue - first_issue + 1, exp_span));
  endtask

  initial begin
    dec_t q [$];
    repeat (2) @(posedge clk);
    rst_n = 1;

    // single TLUT: two micro-ops writing dst, dst+1
    q = '{mk(OP_TLUT, 8, 0, 0)};
    run(q, 2, 0, 2, "TLUT");
    chk(issued[0].idx == 0 && issued[0].dst == 8 && issued[1].idx == 1 && issued[1].dst == 9 &&
        issued[1].last && !issued[0].last, "TLUT micro-op fields");

    // single TGEMV: four micro-ops
    q = '{mk(OP_TGEMV, 4, 8, 2)};
    run(q, 4, 0, 4, "TGEMV");
    for (int i = 0; i < 4; i++)
      chk(issued[i].idx == 2'(i) && issued[i].dst == 4 && issued[i].src1 == 8 &&
          issued[i].src2 == 2 && issued[i].op == OP_TGEMV, "TGEMV micro-op fields");

    // independent back-to-back: 4 TGEMV -> 16 consecutive cycles, no stall
    q = '{mk(OP_TGEMV, 4, 8, 2), mk(OP_TGEMV, 5, 8, 3), mk(OP_TGEMV, 6, 10, 2), mk(OP_TGEMV, 7, 10, 3)};
    run(q, 16, 0, 16, "4 x TGEMV");

    // dependent: TLUT writes 8,9 then TGEMV reads 8:9 -> one stall
    q = '{mk(OP_TLUT, 8, 0, 0), mk(OP_TGEMV, 4, 8, 2)};
    run(q, 6, 1, 7, "TLUT->TGEMV");

    // dependent base ops and TGEMV accumulating into a register just written
    q = '{mk(OP_VADD, 3, 1, 2), mk(OP_VSUB, 5, 3, 2), mk(OP_TGEMV, 5, 8, 2)};
    run(q, 6, 2, 8, "VADD->VSUB->TGEMV");

    // no stall when the following instruction does not read the written register
    q = '{mk(OP_VADD, 3, 1, 2), mk(OP_VADD, 6, 1, 2), mk(OP_TLUT, 10, 0, 1)};
    run(q, 4, 0, 4, "independent mix");

    // illegal: pulse, no micro-op
    begin
      int i0;
      i0 = n_illegal;
      q = '{mk(OP_TLUT, 9, 0, 0, 1), mk(OP_VADD, 1, 2, 3)};
      run(q, 1, 0, 1, "illegal");
      chk(n_illegal - i0 == 1, "illegal pulse");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
