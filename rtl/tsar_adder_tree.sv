// tsar_adder_tree: N-to-1 binary adder tree (N a power of two), two's-complement wrap.
//
// The slice's dot-product adder trees are 4-to-1 (s = 4). In TGEMV each tree sums the
// s per-block differences of one output channel (Fig. 6(c)). The tree has log2(N)
// levels of pairwise adders. Combinational.
module tsar_adder_tree #(
  parameter int unsigned N = 4,
  parameter int unsigned W = 16
) (
  input  logic [N-1:0][W-1:0] in,
  output logic [W-1:0]        sum
);
  localparam int unsigned LEVELS = $clog2(N);

  initial assert (N >= 2 && (1 << LEVELS) == N) else $error("N must be a power of two >= 2");

  for (genvar lv = 0; lv <= LEVELS; lv++) begin : g_lvl
    logic [(N >> lv)-1:0][W-1:0] node;
    if (lv == 0) begin : g_leaf
      assign node = in;
    end else begin : g_add
      for (genvar i = 0; i < (N >> lv); i++) begin : g_node
        assign node[i] = g_lvl[lv-1].node[2*i] + g_lvl[lv-1].node[2*i+1];
      end
    end
  end

  assign sum = g_lvl[LEVELS].node[0];
endmodule
