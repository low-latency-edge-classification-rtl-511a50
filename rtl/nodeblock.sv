// nodeblock: the Nodeblock function, one dataflow stage. It holds one
// Nodeblock PE per node lane (15: 2 for each barrel group B1..B4, 1 for each
// endcap group E1..E7) and runs them in lockstep over one graph at a time.
//
// Inputs are two sets of per-lane memories: the original node features x_v
// (written by the graph loader, channel x) and the aggregated features a_v
// (written by the Aggregate stage, channel a). When both channels hold a
// graph and the output channel has room, address k = 0, 1, ... of all lane
// memories is read, one per clock, and each valid node goes through its PE;
// the updated features x'_v stream out on out_valid/out_addr/out_x (out_addr
// is the lane address k). Then out_commit, x_release and a_release pulse.
//
// Timing: max-lane-nodes + 7 clocks per graph (start, memory read, PE
// latency 3, drain, commit). Lockstep control is this design's choice.
module nodeblock
  import gnn_pkg::*;
#(
  parameter int unsigned XBANKS = 5,
  parameter int unsigned ABANKS = 2,
  localparam int unsigned XBW = (XBANKS > 1) ? $clog2(XBANKS) : 1,
  localparam int unsigned ABW = (ABANKS > 1) ? $clog2(ABANKS) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  fx_t [NB_NP-1:0]                 wts,
  // node feature memories
  input  logic [XBW-1:0]                  x_wbank,
  input  logic [N_NLANE-1:0]              x_we,
  input  laddr_t [N_NLANE-1:0]            x_waddr,
  input  node_vec_t [N_NLANE-1:0]         x_wdata,
  input  logic                            x_avail,
  input  logic [XBW-1:0]                  x_rbank,
  input  graph_sizes_t                    x_meta,
  output logic                            x_release,
  // aggregated feature memories
  input  logic [ABW-1:0]                  a_wbank,
  input  logic [N_NLANE-1:0]              a_we,
  input  laddr_t [N_NLANE-1:0]            a_waddr,
  input  edge_vec_t [N_NLANE-1:0]         a_wdata,
  input  logic                            a_avail,
  input  logic [ABW-1:0]                  a_rbank,
  output logic                            a_release,
  // updated node features
  input  logic                            out_space,
  output logic                            out_commit,
  output graph_sizes_t                    out_meta,
  output logic [N_NLANE-1:0]              out_valid,
  output laddr_t [N_NLANE-1:0]            out_addr,
  output node_vec_t [N_NLANE-1:0]         out_x,
  output logic                            busy
);

  localparam int unsigned DRAIN = 5;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_t;
  state_t       state;
  graph_sizes_t sizes;
  laddr_t       k;
  logic [3:0]   dcnt;

  laddr_t [N_NLANE-1:0] cnt;
  laddr_t               maxcnt;
  always_comb begin
    maxcnt = '0;
    for (int l = 0; l < N_NLANE; l++) begin
      cnt[l] = laddr_t'(lane_count(int'(sizes.n_nodes[nlane_grp(l)]), nlane_pos(l),
                                   node_pe(nlane_grp(l))));
      if (cnt[l] > maxcnt) maxcnt = cnt[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sizes <= '0; k <= '0; dcnt <= '0;
    end else begin
      case (state)
        S_IDLE: if (x_avail && a_avail && out_space) begin
          sizes <= x_meta; k <= '0; state <= S_RUN;
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
  assign x_release  = (state == S_DONE);
  assign a_release  = (state == S_DONE);
  assign out_meta   = sizes;
  assign busy       = (state != S_IDLE);

  for (genvar l = 0; l < N_NLANE; l++) begin : g_lane
    localparam int unsigned NG  = nlane_grp(l);
    localparam int unsigned ND  = node_lane_depth(NG);
    localparam int unsigned NAW = $clog2(ND);

    node_vec_t xv;
    edge_vec_t av;
    logic      rd_v;
    laddr_t    rd_k;

    pipo_ram #(.NBANKS(XBANKS), .DEPTH(ND), .W($bits(node_vec_t))) u_xmem (
      .clk, .we(x_we[l]), .wbank(x_wbank), .waddr(NAW'(x_waddr[l])), .wdata(x_wdata[l]),
      .rbank(x_rbank), .raddr(NAW'(k)), .rdata(xv));
    pipo_ram #(.NBANKS(ABANKS), .DEPTH(ND), .W($bits(edge_vec_t))) u_amem (
      .clk, .we(a_we[l]), .wbank(a_wbank), .waddr(NAW'(a_waddr[l])), .wdata(a_wdata[l]),
      .rbank(a_rbank), .raddr(NAW'(k)), .rdata(av));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin rd_v <= 1'b0; rd_k <= '0; end
      else begin
        rd_v <= (state == S_RUN) && (k < cnt[l]);
        rd_k <= k;
      end
    end

    nodeblock_pe u_pe (
      .clk, .rst_n, .wts,
      .in_valid(rd_v), .in_x(xv), .in_a(av), .in_tag(rd_k),
      .out_valid(out_valid[l]), .out_tag(out_addr[l]), .out_x(out_x[l]));
  end

endmodule
