// adder_tree: combinational binary adder tree.
//
// Sums NIN unsigned operands of IW bits each into one OW-bit result. The tree
// has ceil(log2(NIN)) levels of two-input adders; missing operands of the
// padded power-of-two tree are zero. It is the "tree-structured adder" used everywhere in
// the pipeline: bundling the N bound features per dimension in the encoder,
// counting XNOR matches over a chunk in the attention and classifier units,
// and bundling the selected value bits in the attention output unit. The tree
// shape follows the paper; making it purely combinational (no pipeline
// registers inside) is this design's choice.
module adder_tree #(
  parameter int unsigned NIN = 8,
  parameter int unsigned IW  = 1,
  parameter int unsigned OW  = IW + $clog2(NIN + 1)
) (
  input  logic [NIN-1:0][IW-1:0] in,
  output logic [OW-1:0]          sum
);
  localparam int unsigned LEV = (NIN < 2) ? 0 : $clog2(NIN);
  localparam int unsigned NP  = 1 << LEV;   // leaves, padded to a power of two

  // Level by level, node j of the next level is the sum of nodes 2j and 2j+1
  // of the current one; the in-place update reads only indices >= the one it
  // writes, so each level sees the previous level's values.
  always_comb begin
    logic [OW-1:0] node [NP];
    for (int unsigned i = 0; i < NP; i++)
      node[i] = (i < NIN) ? OW'(in[i]) : '0;
    for (int unsigned s = NP / 2; s >= 1; s = s / 2)
      for (int unsigned j = 0; j < s; j++)
        node[j] = node[2*j] + node[2*j+1];
    sum = node[0];
  end
endmodule
