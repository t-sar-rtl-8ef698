// tsar_unit: a 256-bit SIMD unit with the T-SAR ternary LUT extension (top level).
//
// Instructions arrive one at a time as VEX3 byte strings (valid/ready). The decoder
// turns them into operations, the sequencer splits them into micro-ops and holds them
// back on register hazards, and each micro-op reads the register file, passes through
// the SIMD slice in one cycle and is written back one cycle later:
//   cycle t   : micro-op issues, reads YMM registers, computes (EX)
//   cycle t+1 : write-back register writes the result lanes into the register file (WB)
// TLUT_2x4 therefore occupies issue for 2 cycles, TGEMV_8x16 for 4, VPADDW/VPSUBW for 1,
// and a result can be read by a micro-op issued two cycles after the one producing it
// (one stall cycle if a dependent instruction follows immediately).
// A host port (standing in for the core's load/store path) writes and reads whole
// registers; the host must only write while `busy` is low.
// Pipeline depth, host port and stall policy are this design's choices; instruction
// set, micro-op counts and datapath come from the paper.
module tsar_unit
  import tsar_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // instruction stream
  input  logic   instr_valid,
  input  instr_t instr,
  output logic   instr_ready,
  output logic   illegal,      // one-cycle pulse: unsupported instruction dropped
  output logic   busy,
  // status
  output logic   uop_issue,    // a micro-op executes this cycle
  output logic   stall,        // scoreboard stall this cycle
  // host access to the register file
  input  logic   host_we,
  input  vaddr_t host_waddr,
  input  vreg_t  host_wdata,
  input  vaddr_t host_raddr,
  output vreg_t  host_rdata
);
  dec_t       dec;
  uop_t       uop;
  logic       uop_valid, seq_busy;
  vpair_t     pair;
  vreg_t      src2, dst_old, ex_wdata;
  lane_mask_t ex_wmask;

  logic       wb_valid, wb_tag;
  vaddr_t     wb_dst;
  vreg_t      wb_data;
  lane_mask_t wb_mask;

  tsar_decoder u_dec (.instr, .dec);

  tsar_uop_sequencer u_seq (
    .clk, .rst_n,
    .in_valid(instr_valid), .in_dec(dec), .in_ready(instr_ready),
    .wb_valid, .wb_dst, .wb_tag,
    .uop_valid, .uop, .stall, .illegal, .busy(seq_busy)
  );

  tsar_vrf u_vrf (
    .clk, .rst_n,
    .ra_addr(uop.src1), .ra_data(pair),
    .rb_addr(uop.src2), .rb_data(src2),
    .rd_addr(uop.dst),  .rd_data(dst_old),
    .we(wb_valid), .waddr(wb_dst), .wdata(wb_data), .wmask(wb_mask),
    .host_we, .host_waddr, .host_wdata, .host_raddr, .host_rdata
  );

  tsar_simd_slice u_slice (
    .op(uop_valid ? uop.op : OP_NONE), .uop_idx(uop.idx),
    .pair, .src2, .dst_old,
    .wdata(ex_wdata), .wmask(ex_wmask)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_valid <= 1'b0;
      wb_tag   <= 1'b0;
      wb_dst   <= '0;
      wb_data  <= '0;
      wb_mask  <= '0;
    end else begin
      wb_valid <= uop_valid;
      if (uop_valid) begin
        wb_tag  <= uop.tag;
        wb_dst  <= uop.dst;
        wb_data <= ex_wdata;
        wb_mask <= ex_wmask;
      end
    end
  end

  assign uop_issue = uop_valid;
  assign busy      = seq_busy || wb_valid;

  // the last micro-op of an instruction carries the last micro-op index
  assert property (@(posedge clk) disable iff (!rst_n)
                   uop_valid && uop.last |-> int'(uop.idx) == num_uops(uop.op) - 1);
  // valid/ready rule: an offered instruction stays offered, unchanged, until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   instr_valid && !instr_ready |=> instr_valid && $stable(instr))
    else $error("instruction withdrawn or changed before it was accepted");
  assert property (@(posedge clk) disable iff (!rst_n) host_we |-> !busy)
    else $error("host register write while the unit is busy");
endmodule
