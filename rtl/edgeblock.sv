// edgeblock: the Edgeblock function, one dataflow stage of the pipeline. It
// holds one Edgeblock PE per edge lane (22 in all: 4 for each of the 3 A-A
// edge groups, 1 for each of the 4 A-B and 6 B-B groups) and runs them in
// lockstep over one graph at a time.
//
// Inputs: the edge memories (one per lane, written by the producer through
// e_we/e_waddr/e_wdata into bank e_wbank) and the node features (one write
// port per node lane, fanned out to the node arrays of every PE whose sender
// or receiver group is that node group). A graph is started when the edge
// channel and the node channel both hold one (e_avail, x_avail) and the
// output channels have room (out_space). The stage then reads address
// k = 0, 1, ... of every lane memory, one per clock, for as many edges as the
// busiest lane holds, feeds each valid edge to its PE and streams the PE
// results out on out_valid/out_addr/out_i/out_j/out_y (out_addr is the lane
// address k, so edge number k*PEs + position of its group). When the last
// result has left it pulses out_commit, e_release and x_release.
//
// Timing: a graph takes max-lane-edges + 8 clocks (start, memory read, PE
// latency 4, drain, commit), after which the next one can start at once.
//
// The pipeline uses this module twice: as the first Edgeblock (NOUT = 4,
// updated edge features) and as the last one (NOUT = 1 with the hard
// sigmoid, edge scores). Lockstep control of all PEs, like one dataflow
// process per function, is this design's reading of the paper.
module edgeblock
  import gnn_pkg::*;
#(
  parameter int unsigned NOUT    = 4,
  parameter bit          SIGMOID = 1'b0,
  parameter int unsigned EBANKS  = 2,
  parameter int unsigned XBANKS  = 2,
  localparam int unsigned EBW = (EBANKS > 1) ? $clog2(EBANKS) : 1,
  localparam int unsigned XBW = (XBANKS > 1) ? $clog2(XBANKS) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  fx_t [mlp_nparam(EB_IN, NOUT)-1:0] wts,
  // edge memories
  input  logic [EBW-1:0]                  e_wbank,
  input  logic [N_ELANE-1:0]              e_we,
  input  laddr_t [N_ELANE-1:0]            e_waddr,
  input  edge_rec_t [N_ELANE-1:0]         e_wdata,
  input  logic                            e_avail,
  input  logic [EBW-1:0]                  e_rbank,
  input  graph_sizes_t                    e_meta,
  output logic                            e_release,
  // node arrays
  input  logic [XBW-1:0]                  x_wbank,
  input  logic [N_NLANE-1:0]              x_we,
  input  laddr_t [N_NLANE-1:0]            x_waddr,
  input  node_vec_t [N_NLANE-1:0]         x_wdata,
  input  logic                            x_avail,
  input  logic [XBW-1:0]                  x_rbank,
  output logic                            x_release,
  // results
  input  logic                            out_space,
  output logic                            out_commit,
  output graph_sizes_t                    out_meta,
  output logic [N_ELANE-1:0]              out_valid,
  output laddr_t [N_ELANE-1:0]            out_addr,
  output nidx_t [N_ELANE-1:0]             out_i,
  output nidx_t [N_ELANE-1:0]             out_j,
  output fx_t [N_ELANE-1:0][NOUT-1:0]     out_y,
  output logic                            busy
);

  localparam int unsigned DRAIN = 6;   // memory read + PE latency + margin

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t       state;
  graph_sizes_t sizes;
  laddr_t       k;
  logic [3:0]   dcnt;

  laddr_t [N_ELANE-1:0] cnt;
  laddr_t               maxcnt;
  always_comb begin
    maxcnt = '0;
    for (int l = 0; l < N_ELANE; l++) begin
      cnt[l] = laddr_t'(lane_count(int'(sizes.n_edges[elane_grp(l)]), elane_pos(l),
                                   edge_pe(elane_grp(l))));
      if (cnt[l] > maxcnt) maxcnt = cnt[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sizes <= '0; k <= '0; dcnt <= '0;
    end else begin
      case (state)
        S_IDLE: if (e_avail && x_avail && out_space) begin
          sizes <= e_meta; k <= '0; state <= S_RUN;
        end
        S_RUN: begin
          if (k + 1'b1 >= maxcnt) begin state <= S_DRAIN; dcnt <= '0; end
          else k <= k + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 4'(DRAIN-1)) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_commit = (state == S_DONE);
  assign e_release  = (state == S_DONE);
  assign x_release  = (state == S_DONE);
  assign out_meta   = sizes;
  assign busy       = (state != S_IDLE);

  for (genvar l = 0; l < N_ELANE; l++) begin : g_lane
    localparam int unsigned G  = elane_grp(l);
    localparam int unsigned SG = egrp_src(G);
    localparam int unsigned DG = egrp_dst(G);
    localparam int unsigned ED = edge_lane_depth(G);
    localparam int unsigned EAW = $clog2(ED);

    edge_rec_t rec;
    logic      rd_v;
    laddr_t    rd_k;

    pipo_ram #(.NBANKS(EBANKS), .DEPTH(ED), .W($bits(edge_rec_t))) u_emem (
      .clk, .we(e_we[l]), .wbank(e_wbank), .waddr(EAW'(e_waddr[l])), .wdata(e_wdata[l]),
      .rbank(e_rbank), .raddr(EAW'(k)), .rdata(rec));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin rd_v <= 1'b0; rd_k <= '0; end
      else begin
        rd_v <= (state == S_RUN) && (k < cnt[l]);
        rd_k <= k;
      end
    end

    edgeblock_pe #(
      .SRC_LANES(node_pe(SG)), .SRC_LDEPTH(node_lane_depth(SG)),
      .DST_LANES(node_pe(DG)), .DST_LDEPTH(node_lane_depth(DG)),
      .NBANKS(XBANKS), .NOUT(NOUT), .SIGMOID(SIGMOID)
    ) u_pe (
      .clk, .rst_n,
      .wbank(x_wbank),
      .src_we(x_we[node_lane_base(SG) +: node_pe(SG)]),
      .src_waddr(x_waddr[node_lane_base(SG) +: node_pe(SG)]),
      .src_wdata(x_wdata[node_lane_base(SG) +: node_pe(SG)]),
      .dst_we(x_we[node_lane_base(DG) +: node_pe(DG)]),
      .dst_waddr(x_waddr[node_lane_base(DG) +: node_pe(DG)]),
      .dst_wdata(x_wdata[node_lane_base(DG) +: node_pe(DG)]),
      .rbank(x_rbank),
      .wts,
      .in_valid(rd_v), .in_rec(rec), .in_tag(rd_k),
      .out_valid(out_valid[l]), .out_i(out_i[l]), .out_j(out_j[l]),
      .out_tag(out_addr[l]), .out_y(out_y[l]));
  end

endmodule
