// macro_adder_tree -- combines the MAC results of K parallel macros.
//
// In one cycle macro k works on workload row r+k, whose weight is 2^(8k)
// relative to row r, so the tree forms sum_k v[k] * 2^(8k).  The result is a
// (21 + 8(K-1) + 1)-bit number (21 bits for K = 1) that the accumulator treats
// as K consecutive output digits plus carry.  Built as a balanced binary tree
// of adders over K inputs; purely combinational.
//
// The paper names this adder tree and says it aggregates the parallel macros;
// the weighting by 2^(8k) follows from its mapping, the tree shape is this
// design's own.
module macro_adder_tree
  import lamos_pkg::*;
#(
  parameter int unsigned K    = 2,
  parameter int unsigned IN_W = MAC_W,
  parameter int unsigned OUT_W = (K == 1) ? IN_W : IN_W + DIGIT_W * (K - 1) + 1
) (
  input  logic [K-1:0][IN_W-1:0] v,
  output logic [OUT_W-1:0]       sum
);

  // Pad the level count to a power of two.
  localparam int unsigned LEVELS = (K <= 1) ? 0 : $clog2(K);
  localparam int unsigned NODES  = 1 << LEVELS;

  logic [OUT_W-1:0] node [LEVELS+1][NODES];

  always_comb begin
    for (int l = 0; l <= int'(LEVELS); l++) begin
      for (int i = 0; i < int'(NODES); i++) node[l][i] = '0;
    end
    // Leaves: weighted macro results.
    for (int k = 0; k < int'(K); k++) begin
      node[0][k] = OUT_W'(v[k]) << (DIGIT_W * k);
    end
    // Pairwise reduction.
    for (int l = 1; l <= int'(LEVELS); l++) begin
      for (int i = 0; i < int'(NODES >> l); i++) begin
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
      end
    end
    sum = node[LEVELS][0];
  end

endmodule
