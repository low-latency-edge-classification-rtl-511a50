// nodeblock_pe: one Nodeblock processing element. For each node it forms
// [x_v, a_v] from the node's own features (3) and its aggregated edge
// features (4) and runs the node MLP (7 -> 8 -> 8 -> 3), giving the updated
// node features x'_v. One node per clock; the result and the caller's tag
// come out PE_LAT = 3 clocks after the input.
module nodeblock_pe
  import gnn_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  fx_t [NB_NP-1:0]               wts,
  input  logic                          in_valid,
  input  node_vec_t                     in_x,
  input  edge_vec_t                     in_a,
  input  laddr_t                        in_tag,
  output logic                          out_valid,
  output laddr_t                        out_tag,
  output node_vec_t                     out_x
);

  localparam int unsigned MLP_LAT = 3;

  fx_t [NB_IN-1:0] mlp_in;
  always_comb begin
    for (int k = 0; k < NODE_DIM; k++) mlp_in[k] = in_x[k];
    for (int k = 0; k < EDGE_DIM; k++) mlp_in[NODE_DIM + k] = in_a[k];
  end

  mlp #(.NIN(NB_IN), .NOUT(NODE_DIM)) u_mlp (
    .clk, .rst_n, .in_valid(in_valid), .x(mlp_in), .wts, .out_valid(out_valid), .y(out_x));

  laddr_t st [MLP_LAT];
  always_ff @(posedge clk) begin
    st[0] <= in_tag;
    for (int k = 1; k < MLP_LAT; k++) st[k] <= st[k-1];
  end
  assign out_tag = st[MLP_LAT-1];

endmodule
