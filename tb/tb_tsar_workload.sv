// tb_tsar_workload: runs BitLinear-layer shaped ternary GEMV/GEMM kernels on the unit.
//
// Shape N x K x M: activations (N,K) int8, ternary weights (K,M), int16 outputs (N,M).
// The kernel is the activation-persistent loop: for each 8-wide k-block and each row n,
// one TLUT_2x4; for each 16-wide m-tile, one TGEMV_8x16 accumulating into the output
// register of that tile. Outputs live in YMM12..15 (64 columns) and are read back and
// compared with a direct int sum (wrapped to 16 bits, as the hardware accumulates in
// int16) after every 64-column stripe. Weights are generated on the fly from a hash
// of (k, m), activations from a hash of (n, k), so no data files are needed.
// Shapes (K x M of BitNet-b1.58 layers): 768x768 of the 125M model as decode GEMV
// (N=1) and as prefill GEMM with N=128 rows, and the 2560x6912 and 6912x2560 layers of
// the 2B-4T model as decode GEMV. Because only four output registers are used, the
// LUTs of a k-block are regenerated for every 64-column stripe. The issue-cycle count of the TGEMV/TLUT micro-ops is
// checked against 4 per TGEMV and 2 per TLUT.
`timescale 1ns/1ps
module tb_tsar_workload;
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
  longint n_uop = 0;

  tsar_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && uop_issue) n_uop++;

  initial begin : watchdog
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wgt(int k, int m);
    int unsigned h = (k * 32'h9E3779B1) ^ (m * 32'h85EBCA77) ^ 32'h27d4eb2f;
    h ^= h >> 15;
    return int'(h % 3) - 1;
  endfunction

  function automatic logic [7:0] act(int n, int k);
    int unsigned h = (n * 32'hC2B2AE3D) ^ (k * 32'h165667B1) ^ 32'h1b873593;
    h ^= h >> 13;
    return 8'(h);
  endfunction

  task automatic hwrite(int r, vreg_t v);
    @(negedge clk);
    host_we = 1; host_waddr = vaddr_t'(r); host_wdata = v;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic issue(instr_t i);
    @(negedge clk);
    instr_valid = 1; instr = i;
    while (!instr_ready) @(negedge clk);
    @(posedge clk);
  endtask

  task automatic drain();
    @(negedge clk);
    instr_valid = 0;
    while (busy) @(negedge clk);
  endtask

  task automatic run_shape(int N, int K, int M, string name);
    longint u0;
    int n_tl, n_tg;
    u0 = n_uop; n_tl = 0; n_tg = 0;
    for (int n = 0; n < N; n++)
      for (int m0 = 0; m0 < M; m0 += 64) begin
        int tiles;
        tiles = (M - m0 >= 64) ? 4 : (M - m0) / 16;
        drain();
        for (int t = 0; t < tiles; t++) hwrite(12 + t, '0);
        for (int kb = 0; kb < K / 8; kb++) begin
          vreg_t xr;
          xr = '0;
          for (int i = 0; i < 8; i++) xr[8*i +: 8] = act(n, 8*kb + i);
          drain();
          hwrite(0, xr);
          for (int t = 0; t < tiles; t++) begin
            int ws[16][8];
            for (int j = 0; j < 16; j++)
              for (int i = 0; i < 8; i++) ws[j][i] = wgt(8*kb + i, m0 + 16*t + j);
            hwrite(2 + t, encode_weights(ws));
          end
          issue(i_tlut(8, 0)); n_tl++;
          for (int t = 0; t < tiles; t++) begin
            issue(i_tgemv(12 + t, 8, 2 + t)); n_tg++;
          end
        end
        drain();
        for (int t = 0; t < tiles; t++) begin
          vreg_t v;
          v = dut.u_vrf.regs[12 + t];
          for (int j = 0; j < 16; j++) begin
            int y;
            y = 0;
            for (int k = 0; k < K; k++) y += wgt(k, m0 + 16*t + j) * int'($signed(act(n, k)));
            checks++;
            if (v[16*j +: 16] != 16'(y)) begin
              failures++;
              if (failures < 10) $display("FAIL %s n=%0d m=%0d got %0d want %0d", name, n,
                                          m0 + 16*t + j, $signed(v[16*j +: 16]), y);
            end
          end
        end
      end
    checks++;
    if (n_uop - u0 != 2 * n_tl + 4 * n_tg) begin
      failures++;
      $display("FAIL %s: %0d micro-ops for %0d TLUT + %0d TGEMV", name, n_uop - u0, n_tl, n_tg);
    end
    $display("%s (%0dx%0dx%0d): %0d TLUT, %0d TGEMV, %0d micro-op cycles", name, N, K, M,
             n_tl, n_tg, n_uop - u0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_shape(1, 768, 768, "125M decode GEMV");
    run_shape(128, 768, 768, "125M prefill GEMM");
    run_shape(1, 2560, 6912, "2B-4T decode GEMV");
    run_shape(1, 6912, 2560, "2B-4T decode GEMV");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
