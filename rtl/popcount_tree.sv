// popcount_tree: balanced adder tree summing N_IN unsigned values.
//
// Used twice in the array: with 1-bit inputs it is the 32-bit popcount of a
// cell (32 bits to a 0..32 count), and with the cells' 6-bit counts it is the
// column popcount tree shared by the 32 cells of a column. The design is
// described as built from tree adders; the tree here is purely combinational,
// log2(N_IN) levels of two-input adders, each level one bit wider.
// N_IN must be a power of two.
module popcount_tree #(
  parameter int unsigned N_IN  = 32,
  parameter int unsigned IN_W  = 1,
  parameter int unsigned OUT_W = 6
) (
  input  logic [N_IN-1:0][IN_W-1:0] in,
  output logic [OUT_W-1:0]          sum
);

  localparam int unsigned LEVELS = $clog2(N_IN);

  // Level l holds N_IN >> l partial sums, each of 2**l inputs.
  for (genvar l = 0; l <= LEVELS; l++) begin : g_level
    logic [OUT_W-1:0] node [N_IN >> l];
    for (genvar i = 0; i < (N_IN >> l); i++) begin : g_node
      if (l == 0) begin : g_leaf
        assign node[i] = OUT_W'(in[i]);
      end else begin : g_add
        assign node[i] = g_level[l-1].node[2*i] + g_level[l-1].node[2*i+1];
      end
    end
  end

  assign sum = g_level[LEVELS].node[0];

  initial begin
    assert ((1 << LEVELS) == N_IN) else $error("popcount_tree: N_IN must be a power of two");
    assert (OUT_W >= $clog2(N_IN * ((1 << IN_W) - 1) + 1))
      else $error("popcount_tree: OUT_W too narrow");
  end

endmodule
