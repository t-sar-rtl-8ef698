// tb_tsar_unit: end-to-end test of the ternary LUT SIMD unit at its default size.
//
// Registers are loaded through the host port, instruction byte strings are streamed in,
// and results are read back and compared with reference models computed directly from
// the ternary weights and int8 activations (tsar_tb_pkg). Covered:
//   TLUT_2x4 (LUT contents), TGEMV_8x16 (GEMV + fused accumulation, repeated),
//   back-to-back dependent TLUT -> TGEMV (scoreboard stall), VPADDW/VPSUBW through the
//   same ALUs, an unsupported opcode (illegal pulse, no state change), issue-cycle counts
//   (2 per TLUT, 4 per TGEMV, 1 per base op), and a (1,64)x(64,32) GEMV run as an
//   activation-persistent and as an output-persistent instruction sequence.
// Every mechanism must occur at least once or a failure is counted.
`timescale 1ns/1ps
module tb_tsar_unit;
  import tsar_pkg::*;
  import tsar_tb_pkg::*;

  logic   clk = 0, rst_n = 0;
  logic   instr_valid = 0;
  instr_t instr = '0;
  logic   instr_ready, illegal, busy, uop_issue, stall;
  logic   host_we = 0;
  vaddr_t host_waddr = '0, host_raddr = '0;
  vreg_t  host_wdata = '0, host_rdata;

  int checks = 0, failures = 0;
  int n_stall = 0, n_illegal = 0, n_uop = 0, n_tlut = 0, n_tgemv = 0, n_base = 0, n_accum = 0;
  longint cyc = 0;

  tsar_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (stall)     n_stall++;
    if (illegal)   n_illegal++;
    if (uop_issue) n_uop++;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic hwrite(int r, vreg_t v);
    @(negedge clk);
    host_we = 1; host_waddr = vaddr_t'(r); host_wdata = v;
    @(negedge clk);
    host_we = 0;
  endtask


  // present an instruction; returns after the edge that accepts it
  task automatic issue(instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    while (!instr_ready) @(negedge clk);
    @(posedge clk);
    case (i.opcode)
      8'h00: n_tlut++;
      8'h10: n_tgemv++;
      8'hFD, 8'hF9: n_base++;
      default: ;
    endcase
  endtask

  task automatic drain();
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic vreg_t rand_vreg();
    vreg_t v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  function automatic vreg_t rand_acts();
    vreg_t v = '0;
    for (int i = 0; i < 8; i++) v[8*i +: 8] = rand_act();
    return v;
  endfunction

  // read a register through the host port
  task automatic rd(int r, output vreg_t v);
    @(negedge clk);
    host_raddr = vaddr_t'(r);
    #1 v = host_rdata;
  endtask

  int w0[16][8], w1[16][8];

  initial begin : main
    vreg_t x0, x1, wr0, wr1, acc0, v, v2, expv;
    vpair_t lut;
    longint t0, u0;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // ------------------------------------------------------------ directed TLUT
    x0 = rand_acts();
    x1 = rand_acts();
    foreach (w0[j, i]) w0[j][i] = rand_tern();
    foreach (w1[j, i]) w1[j][i] = rand_tern();
    wr0  = encode_weights(w0);
    wr1  = encode_weights(w1);
    acc0 = rand_vreg();
    hwrite(0, x0); hwrite(1, x1); hwrite(2, wr0); hwrite(3, wr1); hwrite(4, acc0);
    hwrite(5, '0);

    issue(i_tlut(8, 0));
    drain();
    lut = ref_tlut(x0);
    rd(8, v);  check(v == lut[255:0],   "TLUT low register (YMM8)");
    rd(9, v2); check(v2 == lut[511:256], "TLUT high register (YMM9)");

    // ------------------------------------------------------------ TGEMV, accumulate
    issue(i_tgemv(4, 8, 2));
    drain();
    expv = ref_tgemv(x0, w0, acc0);
    rd(4, v); check(v == expv, "TGEMV with accumulation into YMM4");
    issue(i_tgemv(4, 8, 3));
    drain();
    expv = ref_tgemv(x0, w1, expv);
    rd(4, v); check(v == expv, "second TGEMV accumulating into YMM4");
    n_accum += 2;

    // ------------------------------------------------------------ dependent back-to-back
    begin
      int st0;
      st0 = n_stall;
      issue(i_tlut(10, 1));
      issue(i_tgemv(5, 10, 2));     // reads YMM10:11 right after they are produced
      drain();
      expv = ref_tgemv(x1, w0, '0);
      rd(5, v); check(v == expv, "TGEMV directly after TLUT (scoreboard)");
      check(n_stall - st0 == 1, $sformatf("one stall cycle expected, saw %0d", n_stall - st0));
    end

    // ------------------------------------------------------------ issue-cycle counts
    begin
      u0 = n_uop;
      t0 = cyc;
      for (int r = 0; r < 4; r++) issue(i_tgemv(12 + r, 8, 2));   // independent
      drain();
      check(n_uop - u0 == 16, $sformatf("4 TGEMV = 16 micro-ops, saw %0d", n_uop - u0));
      u0 = n_uop;
      issue(i_tlut(8, 0));
      issue(i_tlut(10, 1));
      drain();
      check(n_uop - u0 == 4, $sformatf("2 TLUT = 4 micro-ops, saw %0d", n_uop - u0));
    end
    // throughput: 8 independent TGEMV back-to-back must issue on 32 consecutive cycles
    begin
      longint first, last;
      int cnt;
      first = -1; last = -1; cnt = 0;
      fork
        begin
          for (int r = 0; r < 8; r++) issue(i_tgemv(12 + (r % 4), 8, 2 + (r % 2)));
          drain();
        end
        begin
          while (cnt < 32) begin
            @(posedge clk);
            if (uop_issue) begin
              if (first < 0) first = cyc;
              last = cyc;
              cnt++;
            end
          end
        end
      join
      check(last - first == 31, $sformatf("32 TGEMV micro-ops over %0d cycles, expected 32",
                                          last - first + 1));
    end

    // ------------------------------------------------------------ base instructions
    begin
      vreg_t a, b, sum, dif;
      a = rand_vreg(); b = rand_vreg();
      hwrite(6, a); hwrite(7, b);
      issue(i_vpaddw(14, 6, 7));
      issue(i_vpsubw(15, 14, 7));   // dependent: stalls once
      drain();
      for (int l = 0; l < 16; l++) begin
        sum[16*l +: 16] = a[16*l +: 16] + b[16*l +: 16];
        dif[16*l +: 16] = sum[16*l +: 16] - b[16*l +: 16];
      end
      rd(14, v); check(v == sum, "VPADDW");
      rd(15, v); check(v == dif, "VPSUBW after VPADDW");
    end

    // ------------------------------------------------------------ illegal opcodes
    begin
      int il0;
      vreg_t prev;
      il0 = n_illegal;
      rd(12, prev);
      issue(mk_instr(5'h04, 1'b1, 1'b0, 2'b00, 8'h01, 12, 0, 0));   // TLUT_4x4
      issue(mk_instr(5'h04, 1'b1, 1'b0, 2'b00, 8'h11, 12, 8, 2));   // TGEMV_16x16
      issue(i_tlut(13, 0));                                         // odd pair
      drain();
      check(n_illegal - il0 == 3, $sformatf("3 illegal pulses expected, saw %0d", n_illegal - il0));
      rd(12, v); check(v == prev, "illegal instruction leaves registers unchanged");
    end

    // ------------------------------------------------------------ GEMV workload
    // y(1x32) = x(1x64) * W(64x32): 8 k-blocks of 8 activations, 2 m-tiles of 16.
    for (int df = 0; df < 2; df++) begin
      int wm[64][32];
      logic [7:0] xa[64];
      int yref[32];
      foreach (xa[i]) xa[i] = rand_act();
      foreach (wm[i, j]) wm[i][j] = rand_tern();
      foreach (yref[j]) begin
        yref[j] = 0;
        for (int i = 0; i < 64; i++) yref[j] += wm[i][j] * int'($signed(xa[i]));
      end
      hwrite(12, '0); hwrite(13, '0);       // output tiles m=0..15, 16..31
      if (df == 0) begin
        // activation-persistent: k outer, one TLUT per k-block, m inner
        for (int kb = 0; kb < 8; kb++) begin
          vreg_t xr;
          for (int i = 0; i < 8; i++) xr[8*i +: 8] = xa[8*kb + i];
          drain(); hwrite(0, xr);
          for (int mt = 0; mt < 2; mt++) begin
            int ws[16][8];
            for (int j = 0; j < 16; j++) for (int i = 0; i < 8; i++) ws[j][i] = wm[8*kb+i][16*mt+j];
            hwrite(2 + mt, encode_weights(ws));
          end
          issue(i_tlut(8, 0));
          issue(i_tgemv(12, 8, 2));
          issue(i_tgemv(13, 8, 3));
          n_accum += 2;
        end
      end else begin
        // output-persistent: m outer, k inner (LUT regenerated per k-block)
        for (int mt = 0; mt < 2; mt++)
          for (int kb = 0; kb < 8; kb++) begin
            vreg_t xr;
            int ws[16][8];
            for (int i = 0; i < 8; i++) xr[8*i +: 8] = xa[8*kb + i];
            for (int j = 0; j < 16; j++) for (int i = 0; i < 8; i++) ws[j][i] = wm[8*kb+i][16*mt+j];
            drain(); hwrite(0, xr); hwrite(2, encode_weights(ws));
            issue(i_tlut(8, 0));
            issue(i_tgemv(12 + mt, 8, 2));
            n_accum++;
          end
      end
      drain();
      rd(12, v); rd(13, v2);
      for (int j = 0; j < 32; j++) begin
        logic [15:0] got;
        got = (j < 16) ? v[16*j +: 16] : v2[16*(j-16) +: 16];
        check(got == 16'(yref[j]), $sformatf("%s GEMV output %0d: got %0d want %0d",
              df ? "OP" : "AP", j, $signed(got), yref[j]));
      end
    end

    // ------------------------------------------------------------ mechanism coverage
    check(n_tlut > 0,    "TLUT never executed");
    check(n_tgemv > 0,   "TGEMV never executed");
    check(n_base > 0,    "base op never executed");
    check(n_stall > 0,   "scoreboard stall never happened");
    check(n_illegal > 0, "illegal instruction never seen");
    check(n_accum > 0,   "fused accumulation never exercised");
    $display("mechanisms: tlut=%0d tgemv=%0d base=%0d stall_cycles=%0d illegal=%0d accum=%0d uops=%0d",
             n_tlut, n_tgemv, n_base, n_stall, n_illegal, n_accum, n_uop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
