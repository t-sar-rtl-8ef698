// tb_tsar_vrf: register file check against a shadow array: reset to zero, lane-masked
// unit writes, host writes (lower priority), pair read with wrap-around, and the three
// asynchronous read ports.
`timescale 1ns/1ps
module tb_tsar_vrf;
  import tsar_pkg::*;
  logic clk = 0, rst_n = 0;
  vaddr_t ra_addr = '0, rb_addr = '0, rd_addr = '0, waddr = '0, host_waddr = '0, host_raddr = '0;
  vpair_t ra_data;
  vreg_t  rb_data, rd_data, wdata = '0, host_wdata = '0, host_rdata;
  logic   we = 0, host_we = 0;
  lane_mask_t wmask = '0;
  vreg_t  shadow [16];
  int checks = 0, failures = 0;

  tsar_vrf dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vreg_t rv();
    vreg_t v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (shadow[r]) shadow[r] = '0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // check reads of the current state
      ra_addr = 4'($urandom); rb_addr = 4'($urandom); rd_addr = 4'($urandom);
      host_raddr = 4'($urandom);
      #1;
      chk(ra_data == {shadow[4'(ra_addr + 4'd1)], shadow[ra_addr]}, "pair read");
      chk(rb_data == shadow[rb_addr], "port B");
      chk(rd_data == shadow[rd_addr], "port D");
      chk(host_rdata == shadow[host_raddr], "host read");
      // next writes
      we = 1'($urandom); host_we = 1'($urandom);
      waddr = 4'($urandom); host_waddr = 4'($urandom);
      wdata = rv(); host_wdata = rv(); wmask = 16'($urandom);
      @(posedge clk);
      if (we) begin
        for (int l = 0; l < 16; l++) if (wmask[l]) shadow[waddr][16*l +: 16] = wdata[16*l +: 16];
      end else if (host_we) shadow[host_waddr] = host_wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
