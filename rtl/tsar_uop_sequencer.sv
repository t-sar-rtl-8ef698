// tsar_uop_sequencer: micro-op counter and scoreboard of the T-SAR unit.
//
// Accepts one decoded instruction at a time (valid/ready) and issues its micro-ops, one
// per cycle: TLUT_2x4 as 2 micro-ops (one 256-bit LUT register each, Sec. III-C of the
// paper), TGEMV_8x16 as 4 micro-ops (4 output channels each, "Req_cycles = 4" in
// Fig. 6(c)), a base word add/sub as 1. The counter value is the micro-op index that
// steers the operand and write-back MUXes.
// Scoreboard: the micro-op in the write-back stage has not yet reached the register file.
// If it belongs to an earlier instruction and writes a register the issuing micro-op
// reads, issue stalls for a cycle (no bypass). Micro-ops of the same instruction are
// never stalled: their write lanes never overlap what later micro-ops read (the decoder
// rejects a TGEMV whose destination overlaps its LUT pair). The paper names a "tiny
// control/scoreboard block"; the stall-only policy is this design's choice.
// Timing: an instruction accepted at a clock edge issues its first micro-op in the cycle
// that follows that edge;
// a new instruction is accepted in the cycle the last micro-op of the current one
// issues, so back-to-back instructions have no bubble. Illegal instructions are
// accepted, dropped, and reported by a one-cycle pulse on `illegal`.
module tsar_uop_sequencer
  import tsar_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  dec_t   in_dec,
  output logic   in_ready,
  // write-back stage, for the scoreboard
  input  logic   wb_valid,
  input  vaddr_t wb_dst,
  input  logic   wb_tag,
  // issued micro-op
  output logic   uop_valid,
  output uop_t   uop,
  output logic   stall,
  output logic   illegal,
  output logic   busy
);
  logic             cur_valid;
  dec_t             cur;
  logic [UOP_W-1:0] cnt;
  logic             tag;
  logic             last, hazard, accept;
  vaddr_t           src1_hi;

  assign src1_hi = cur.src1 + vaddr_t'(1);
  assign last    = (int'(cnt) == num_uops(cur.op) - 1);

  logic reads;

  always_comb begin
    unique case (cur.op)
      OP_VADD, OP_VSUB: reads = (wb_dst == cur.src1) || (wb_dst == cur.src2);
      OP_TLUT:          reads = (wb_dst == cur.src2);
      OP_TGEMV:         reads = (wb_dst == cur.src1) || (wb_dst == src1_hi) ||
                                (wb_dst == cur.src2) || (wb_dst == cur.dst);
      default:          reads = 1'b0;
    endcase
    hazard = cur_valid && wb_valid && (wb_tag != tag) && reads;
  end

  assign uop_valid = cur_valid && !hazard;
  assign stall     = cur_valid && hazard;
  assign in_ready  = !cur_valid || (uop_valid && last);
  assign accept    = in_valid && in_ready;
  assign busy      = cur_valid;

  always_comb begin
    uop.op   = cur.op;
    uop.idx  = cnt;
    uop.last = last;
    uop.tag  = tag;
    uop.dst  = (cur.op == OP_TLUT) ? cur.dst + vaddr_t'(cnt) : cur.dst;
    uop.src1 = cur.src1;
    uop.src2 = cur.src2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur       <= '0;
      cnt       <= '0;
      tag       <= 1'b0;
      illegal   <= 1'b0;
    end else begin
      illegal <= accept && in_dec.illegal;
      if (uop_valid) cnt <= last ? '0 : cnt + 1'b1;
      if (accept) begin
        cur_valid <= !in_dec.illegal;
        if (!in_dec.illegal) begin
          cur <= in_dec;
          tag <= ~tag;
        end
      end else if (uop_valid && last) begin
        cur_valid <= 1'b0;
      end
    end
  end

  // only legal instructions are held
  assert property (@(posedge clk) disable iff (!rst_n) cur_valid |-> !cur.illegal);
  // a stalled micro-op keeps its index; an instruction is only replaced when finished
  assert property (@(posedge clk) disable iff (!rst_n) stall |=> $stable(cnt));
  assert property (@(posedge clk) disable iff (!rst_n)
                   cur_valid |-> int'(cnt) < num_uops(cur.op));
endmodule
