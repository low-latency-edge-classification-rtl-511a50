// gnn_top: edge-classifying interaction-network accelerator for particle
// tracking, geometry-constrained version with data-aware PE allocation.
//
// The network is Edgeblock -> Aggregate -> Nodeblock -> Edgeblock:
//   e'_ij = MLP_R1([x_i, x_j, e_ij])          (first Edgeblock)
//   a_v   = sum of e'_iv over edges into v     (Aggregate)
//   x'_v  = MLP_O([x_v, a_v])                  (Nodeblock)
//   s_ij  = hsig(MLP_R2([x'_i, x'_j, e'_ij]))  (second Edgeblock, edge score)
// Each function is one dataflow stage working on a whole graph; the stages
// are joined by graph-level FIFO channels so that up to four graphs are in
// flight at once:
//   in (depth 2): loader -> first Edgeblock (edges and node arrays)
//   xn (depth 5): loader -> Nodeblock (original node features)
//   ea (depth 2): first Edgeblock -> Aggregate (receiver index, e')
//   ee (depth 5): first Edgeblock -> second Edgeblock (i, j, e')
//   av (depth 2): Aggregate -> Nodeblock (a_v)
//   xp (depth 2): Nodeblock -> second Edgeblock node arrays (x'_v)
//
// Graph loading: while in_ready is high, the host writes the graph's edges
// through the 22 edge-lane ports and its nodes through the 15 node-lane ports
// (all may write in the same clock), then pulses in_commit with the per-group
// node and edge counts on in_sizes. Edge k of edge group g goes to lane
// edge_lane_base(g) + k mod PEs(g) at address k div PEs(g); node v of node
// group n goes to lane node_lane_base(n) + v mod PEs(n) at address
// v div PEs(n) (see gnn_pkg). Edge indices i, j are node numbers within the
// sender and receiver groups of the edge group.
//
// Results: the edge score of edge k*PEs(g)+pos of group g appears on
// out_valid[lane]/out_idx[lane]/out_score[lane], one edge per lane per clock;
// out_graph_done pulses after the last score of a graph. There is no back
// pressure on the outputs.
//
// Weights: before use, the three MLPs are loaded through w_we/w_sel/w_addr/
// w_data (w_sel 0 = first Edgeblock, 1 = Nodeblock, 2 = second Edgeblock);
// the layout is given in mlp.sv.
//
// The stage structure, channel depths, PE allocation and group geometry
// follow the paper; the loader and result interfaces, weight loading and the
// graph-per-entry reading of the FIFO depths are this design's choices.
module gnn_top
  import gnn_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  // weights
  input  logic                         w_we,
  input  logic [1:0]                   w_sel,
  input  logic [9:0]                   w_addr,
  input  fx_t                          w_data,
  // graph input
  output logic                         in_ready,
  input  logic [N_ELANE-1:0]           in_edge_we,
  input  laddr_t [N_ELANE-1:0]         in_edge_addr,
  input  edge_rec_t [N_ELANE-1:0]      in_edge_rec,
  input  logic [N_NLANE-1:0]           in_node_we,
  input  laddr_t [N_NLANE-1:0]         in_node_addr,
  input  node_vec_t [N_NLANE-1:0]      in_node_x,
  input  logic                         in_commit,
  input  graph_sizes_t                 in_sizes,
  // edge scores
  output logic [N_ELANE-1:0]           out_valid,
  output eidx_t [N_ELANE-1:0]          out_idx,
  output fx_t [N_ELANE-1:0]            out_score,
  output logic                         out_graph_done
);

  localparam int unsigned D_IN = 2, D_XN = 5, D_EA = 2, D_EE = 5, D_AV = 2, D_XP = 2;
  localparam int unsigned MW = $bits(graph_sizes_t);

  // ---------------------------------------------------------- weights
  fx_t [EB1_NP-1:0] w_eb1;
  fx_t [NB_NP-1:0]  w_nb;
  fx_t [EB2_NP-1:0] w_eb2;
  weight_regs #(.N(EB1_NP)) u_w_eb1 (.clk, .rst_n, .we(w_we && w_sel == 2'd0), .addr(w_addr), .data(w_data), .wts(w_eb1));
  weight_regs #(.N(NB_NP))  u_w_nb  (.clk, .rst_n, .we(w_we && w_sel == 2'd1), .addr(w_addr), .data(w_data), .wts(w_nb));
  weight_regs #(.N(EB2_NP)) u_w_eb2 (.clk, .rst_n, .we(w_we && w_sel == 2'd2), .addr(w_addr), .data(w_data), .wts(w_eb2));

  // ---------------------------------------------------------- channels
  logic in_sp, in_av, in_rel;   logic [0:0] in_wb, in_rb;  graph_sizes_t in_rm;
  logic xn_sp, xn_av, xn_rel;   logic [2:0] xn_wb, xn_rb;  graph_sizes_t xn_rm;
  logic ea_sp, ea_av, ea_rel;   logic [0:0] ea_wb, ea_rb;  graph_sizes_t ea_rm;
  logic ee_sp, ee_av, ee_rel;   logic [2:0] ee_wb, ee_rb;  graph_sizes_t ee_rm;
  logic av_sp, av_av, av_rel;   logic [0:0] av_wb, av_rb;  graph_sizes_t av_rm;
  logic xp_sp, xp_av, xp_rel;   logic [0:0] xp_wb, xp_rb;  graph_sizes_t xp_rm;

  logic eb1_commit, agg_commit, nb_commit, eb2_commit;
  graph_sizes_t eb1_meta, agg_meta, nb_meta, eb2_meta;
  logic in_go;

  assign in_ready = in_sp && xn_sp;
  assign in_go    = in_commit && in_ready;

  pipo_ctrl #(.NBANKS(D_IN), .META_W(MW)) u_ch_in (.clk, .rst_n,
    .wr_space(in_sp), .wr_bank(in_wb), .wr_commit(in_go), .wr_meta(in_sizes),
    .rd_avail(in_av), .rd_bank(in_rb), .rd_meta(in_rm), .rd_release(in_rel), .count());
  pipo_ctrl #(.NBANKS(D_XN), .META_W(MW)) u_ch_xn (.clk, .rst_n,
    .wr_space(xn_sp), .wr_bank(xn_wb), .wr_commit(in_go), .wr_meta(in_sizes),
    .rd_avail(xn_av), .rd_bank(xn_rb), .rd_meta(xn_rm), .rd_release(xn_rel), .count());
  pipo_ctrl #(.NBANKS(D_EA), .META_W(MW)) u_ch_ea (.clk, .rst_n,
    .wr_space(ea_sp), .wr_bank(ea_wb), .wr_commit(eb1_commit), .wr_meta(eb1_meta),
    .rd_avail(ea_av), .rd_bank(ea_rb), .rd_meta(ea_rm), .rd_release(ea_rel), .count());
  pipo_ctrl #(.NBANKS(D_EE), .META_W(MW)) u_ch_ee (.clk, .rst_n,
    .wr_space(ee_sp), .wr_bank(ee_wb), .wr_commit(eb1_commit), .wr_meta(eb1_meta),
    .rd_avail(ee_av), .rd_bank(ee_rb), .rd_meta(ee_rm), .rd_release(ee_rel), .count());
  pipo_ctrl #(.NBANKS(D_AV), .META_W(MW)) u_ch_av (.clk, .rst_n,
    .wr_space(av_sp), .wr_bank(av_wb), .wr_commit(agg_commit), .wr_meta(agg_meta),
    .rd_avail(av_av), .rd_bank(av_rb), .rd_meta(av_rm), .rd_release(av_rel), .count());
  pipo_ctrl #(.NBANKS(D_XP), .META_W(MW)) u_ch_xp (.clk, .rst_n,
    .wr_space(xp_sp), .wr_bank(xp_wb), .wr_commit(nb_commit), .wr_meta(nb_meta),
    .rd_avail(xp_av), .rd_bank(xp_rb), .rd_meta(xp_rm), .rd_release(xp_rel), .count());

  // ---------------------------------------------------- first Edgeblock
  logic [N_ELANE-1:0]              e1_v;
  laddr_t [N_ELANE-1:0]            e1_addr;
  nidx_t [N_ELANE-1:0]             e1_i, e1_j;
  fx_t [N_ELANE-1:0][EDGE_DIM-1:0] e1_y;
  logic                            in_rel_x;

  edgeblock #(.NOUT(EDGE_DIM), .SIGMOID(1'b0), .EBANKS(D_IN), .XBANKS(D_IN)) u_eb1 (
    .clk, .rst_n, .wts(w_eb1),
    .e_wbank(in_wb), .e_we(in_edge_we & {N_ELANE{in_ready}}), .e_waddr(in_edge_addr), .e_wdata(in_edge_rec),
    .e_avail(in_av), .e_rbank(in_rb), .e_meta(in_rm), .e_release(in_rel),
    .x_wbank(in_wb), .x_we(in_node_we & {N_NLANE{in_ready}}), .x_waddr(in_node_addr), .x_wdata(in_node_x),
    .x_avail(in_av), .x_rbank(in_rb), .x_release(in_rel_x),
    .out_space(ea_sp && ee_sp), .out_commit(eb1_commit), .out_meta(eb1_meta),
    .out_valid(e1_v), .out_addr(e1_addr), .out_i(e1_i), .out_j(e1_j), .out_y(e1_y), .busy());

  agg_rec_t [N_ELANE-1:0]  ea_wdata;
  edge_rec_t [N_ELANE-1:0] ee_wdata;
  always_comb begin
    for (int l = 0; l < N_ELANE; l++) begin
      ea_wdata[l].v = e1_j[l];
      ea_wdata[l].e = e1_y[l];
      ee_wdata[l].i = e1_i[l];
      ee_wdata[l].j = e1_j[l];
      ee_wdata[l].e = e1_y[l];
    end
  end

  // ----------------------------------------------------------- Aggregate
  logic [N_NLANE-1:0]      ag_v;
  laddr_t [N_NLANE-1:0]    ag_addr;
  edge_vec_t [N_NLANE-1:0] ag_a;

  aggregate #(.IBANKS(D_EA)) u_agg (
    .clk, .rst_n,
    .in_wbank(ea_wb), .in_we(e1_v), .in_waddr(e1_addr), .in_wdata(ea_wdata),
    .in_avail(ea_av), .in_rbank(ea_rb), .in_meta(ea_rm), .in_release(ea_rel),
    .out_space(av_sp), .out_commit(agg_commit), .out_meta(agg_meta),
    .out_valid(ag_v), .out_addr(ag_addr), .out_a(ag_a), .busy(), .fwd_hit());

  // ----------------------------------------------------------- Nodeblock
  logic [N_NLANE-1:0]      nb_v;
  laddr_t [N_NLANE-1:0]    nb_addr;
  node_vec_t [N_NLANE-1:0] nb_x;

  nodeblock #(.XBANKS(D_XN), .ABANKS(D_AV)) u_nb (
    .clk, .rst_n, .wts(w_nb),
    .x_wbank(xn_wb), .x_we(in_node_we & {N_NLANE{in_ready}}), .x_waddr(in_node_addr), .x_wdata(in_node_x),
    .x_avail(xn_av), .x_rbank(xn_rb), .x_meta(xn_rm), .x_release(xn_rel),
    .a_wbank(av_wb), .a_we(ag_v), .a_waddr(ag_addr), .a_wdata(ag_a),
    .a_avail(av_av), .a_rbank(av_rb), .a_release(av_rel),
    .out_space(xp_sp), .out_commit(nb_commit), .out_meta(nb_meta),
    .out_valid(nb_v), .out_addr(nb_addr), .out_x(nb_x), .busy());

  // --------------------------------------------------- second Edgeblock
  logic [N_ELANE-1:0]            e2_v;
  laddr_t [N_ELANE-1:0]          e2_addr;
  fx_t [N_ELANE-1:0][OUT_DIM-1:0] e2_y;
  logic                          xp_rel_e;

  edgeblock #(.NOUT(OUT_DIM), .SIGMOID(1'b1), .EBANKS(D_EE), .XBANKS(D_XP)) u_eb2 (
    .clk, .rst_n, .wts(w_eb2),
    .e_wbank(ee_wb), .e_we(e1_v), .e_waddr(e1_addr), .e_wdata(ee_wdata),
    .e_avail(ee_av), .e_rbank(ee_rb), .e_meta(ee_rm), .e_release(ee_rel),
    .x_wbank(xp_wb), .x_we(nb_v), .x_waddr(nb_addr), .x_wdata(nb_x),
    .x_avail(xp_av), .x_rbank(xp_rb), .x_release(xp_rel_e),
    .out_space(1'b1), .out_commit(eb2_commit), .out_meta(eb2_meta),
    .out_valid(e2_v), .out_addr(e2_addr), .out_i(), .out_j(), .out_y(e2_y), .busy());
  assign xp_rel = xp_rel_e;

  always_comb begin
    for (int l = 0; l < N_ELANE; l++) begin
      out_idx[l]   = eidx_t'(int'(e2_addr[l]) * edge_pe(elane_grp(l)) + elane_pos(l));
      out_score[l] = e2_y[l][0];
    end
  end
  assign out_valid      = e2_v;
  assign out_graph_done = eb2_commit;

  // loader rule: nothing is written while the input channels are full
  a_load_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (|in_edge_we || |in_node_we || in_commit) |-> in_ready);

endmodule
