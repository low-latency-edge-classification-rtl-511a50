// edgeblock_pe: one Edgeblock processing element.
//
// For every edge (sender i, receiver j, edge features e) it looks up the
// sender's features X_i in its private copy of the sender group's node array
// and the receiver's features X_j in its copy of the receiver group's array,
// forms the MLP input [X_i, X_j, e] (3 + 3 + 4 = 10 values) and runs the MLP.
// The first Edgeblock of the pipeline uses NOUT = 4 (updated edge features
// e'); the second uses NOUT = 1 and SIGMOID = 1, giving the edge score in
// [0, 1] through a hard sigmoid clamp(x/4 + 1/2, 0, 1).
//
// Timing: one edge per clock; results come out PE_LAT = 4 clocks after the
// edge goes in (1 clock node-array read, 3 clocks MLP), with i, j and a
// caller-defined tag carried alongside. The node arrays are written through
// their own ports by the stage that produces the node features, into bank
// wbank; the PE reads bank rbank.
//
// Per-PE node arrays and the MLP follow the paper; the hard sigmoid and the
// input order of the MLP are this design's choices.
module edgeblock_pe
  import gnn_pkg::*;
#(
  parameter int unsigned SRC_LANES  = 2,
  parameter int unsigned SRC_LDEPTH = 69,
  parameter int unsigned DST_LANES  = 2,
  parameter int unsigned DST_LDEPTH = 69,
  parameter int unsigned NBANKS     = 2,
  parameter int unsigned NOUT       = 4,
  parameter bit          SIGMOID    = 1'b0,
  localparam int unsigned BW = (NBANKS > 1) ? $clog2(NBANKS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // node array fill
  input  logic [BW-1:0]                 wbank,
  input  logic [SRC_LANES-1:0]          src_we,
  input  laddr_t [SRC_LANES-1:0]        src_waddr,
  input  node_vec_t [SRC_LANES-1:0]     src_wdata,
  input  logic [DST_LANES-1:0]          dst_we,
  input  laddr_t [DST_LANES-1:0]        dst_waddr,
  input  node_vec_t [DST_LANES-1:0]     dst_wdata,
  input  logic [BW-1:0]                 rbank,
  // weights
  input  fx_t [mlp_nparam(EB_IN, NOUT)-1:0] wts,
  // edges
  input  logic                          in_valid,
  input  edge_rec_t                     in_rec,
  input  laddr_t                        in_tag,
  output logic                          out_valid,
  output nidx_t                         out_i,
  output nidx_t                         out_j,
  output laddr_t                        out_tag,
  output fx_t [NOUT-1:0]                out_y
);

  localparam int unsigned MLP_LAT = 3;

  node_vec_t xi, xj;

  node_array #(.NLANES(SRC_LANES), .LDEPTH(SRC_LDEPTH), .NBANKS(NBANKS)) u_src (
    .clk, .wbank, .we(src_we), .waddr(src_waddr), .wdata(src_wdata),
    .rbank, .ridx(in_rec.i), .rdata(xi));
  node_array #(.NLANES(DST_LANES), .LDEPTH(DST_LDEPTH), .NBANKS(NBANKS)) u_dst (
    .clk, .wbank, .we(dst_we), .waddr(dst_waddr), .wdata(dst_wdata),
    .rbank, .ridx(in_rec.j), .rdata(xj));

  // stage 1: node features arrive; line up the edge record with them
  logic      v1;
  edge_rec_t r1;
  laddr_t    t1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; r1 <= '0; t1 <= '0;
    end else begin
      v1 <= in_valid; r1 <= in_rec; t1 <= in_tag;
    end
  end

  fx_t [EB_IN-1:0] mlp_in;
  always_comb begin
    for (int k = 0; k < NODE_DIM; k++) begin
      mlp_in[k]            = xi[k];
      mlp_in[NODE_DIM + k] = xj[k];
    end
    for (int k = 0; k < EDGE_DIM; k++) mlp_in[2*NODE_DIM + k] = r1.e[k];
  end

  logic           mv;
  fx_t [NOUT-1:0] my;
  mlp #(.NIN(EB_IN), .NOUT(NOUT)) u_mlp (
    .clk, .rst_n, .in_valid(v1), .x(mlp_in), .wts, .out_valid(mv), .y(my));

  // sideband delay matching the MLP
  nidx_t  si [MLP_LAT];
  nidx_t  sj [MLP_LAT];
  laddr_t st [MLP_LAT];
  always_ff @(posedge clk) begin
    si[0] <= r1.i; sj[0] <= r1.j; st[0] <= t1;
    for (int k = 1; k < MLP_LAT; k++) begin
      si[k] <= si[k-1]; sj[k] <= sj[k-1]; st[k] <= st[k-1];
    end
  end

  assign out_valid = mv;
  assign out_i     = si[MLP_LAT-1];
  assign out_j     = sj[MLP_LAT-1];
  assign out_tag   = st[MLP_LAT-1];
  always_comb begin
    for (int k = 0; k < NOUT; k++) out_y[k] = SIGMOID ? fx_hsigmoid(my[k]) : my[k];
  end

endmodule
