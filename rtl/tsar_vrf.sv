// tsar_vrf: 16 x 256-bit vector (YMM) register file.
//
// The CPU's existing register file, modelled as a plain array so the unit can run on
// its own. Read port A returns the register pair {vreg[a+1], vreg[a]} (wrapping at 15),
// used for TGEMV's LUT pair YMMn:n+1; ports B and
// D return single registers (src2 and the TGEMV accumulator). Reads are asynchronous.
// One write port with a 16-bit lane (word) enable, written on the rising clock edge; a
// second, lower-priority full-width write port serves the host (load/store side).
// Reset clears all registers. The paper says T-SAR needs "no extra read ports"; how many
// ports the host core has is not given, so the port set here is this design's choice.
module tsar_vrf
  import tsar_pkg::*;
#(
  parameter int unsigned NREGS = NUM_VREGS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  vaddr_t     ra_addr,
  output vpair_t     ra_data,
  input  vaddr_t     rb_addr,
  output vreg_t      rb_data,
  input  vaddr_t     rd_addr,
  output vreg_t      rd_data,
  input  logic       we,
  input  vaddr_t     waddr,
  input  vreg_t      wdata,
  input  lane_mask_t wmask,
  input  logic       host_we,
  input  vaddr_t     host_waddr,
  input  vreg_t      host_wdata,
  input  vaddr_t     host_raddr,
  output vreg_t      host_rdata
);
  vreg_t regs [NREGS];
  vaddr_t ra_next;

  assign ra_next    = ra_addr + vaddr_t'(1);
  assign ra_data    = {regs[ra_next], regs[ra_addr]};
  assign rb_data    = regs[rb_addr];
  assign rd_data    = regs[rd_addr];
  assign host_rdata = regs[host_raddr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else if (we) begin
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) regs[waddr][LANE_W*l +: LANE_W] <= wdata[LANE_W*l +: LANE_W];
    end else if (host_we) begin
      regs[host_waddr] <= host_wdata;
    end
  end
endmodule
