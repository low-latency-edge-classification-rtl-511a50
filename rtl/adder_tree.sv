// adder_tree: sums N edge-feature vectors element by element, as a balanced
// tree of saturating Q7.7 adders (pairs at the first level, pairs of pair sums
// at the next, and so on). Purely combinational. With N = 0 the sum is zero
// (a node group that no edge group points into).
//
// The Aggregate function uses one tree per receiver node lane to add up the
// partial sums that the Aggregate PEs of all edge groups ending in that node
// group hold for the same node. The tree structure follows the paper's
// "parallel adder tree"; saturation at every adder is this design's choice.
module adder_tree
  import gnn_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  edge_vec_t [(N > 0 ? N : 1)-1:0] in,
  output edge_vec_t                       sum
);

  localparam int unsigned NN = (N > 0) ? N : 1;
  localparam int unsigned LEVELS = (NN > 1) ? $clog2(NN) : 1;

  always_comb begin
    edge_vec_t lvl [NN];
    int unsigned cnt;
    for (int k = 0; k < NN; k++) lvl[k] = (N > 0) ? in[k] : '0;
    cnt = NN;
    for (int l = 0; l < LEVELS; l++) begin
      for (int k = 0; k < NN; k++) begin
        if (2*k + 1 < cnt) begin
          for (int d = 0; d < EDGE_DIM; d++) lvl[k][d] = fx_add(lvl[2*k][d], lvl[2*k+1][d]);
        end else if (2*k < cnt) begin
          lvl[k] = lvl[2*k];
        end
      end
      cnt = (cnt + 1) / 2;
    end
    sum = lvl[0];
  end

endmodule
