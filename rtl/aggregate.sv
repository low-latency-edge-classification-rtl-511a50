// aggregate: the Aggregate function, one dataflow stage. It holds one
// Aggregate PE per edge lane (22) and, for every node lane (15), an adder
// tree that adds up the partial sums of all PEs whose edge group ends in
// that lane's node group (4 PEs for B2, B3, B4 and E1; 1 for E2..E7; none
// for B1, which no edge enters, so its sums are zero).
//
// A graph runs in two phases. Accumulate: address k = 0, 1, ... of every
// lane's input memory (receiver index v and updated edge features e') is
// read, one per clock, and each valid edge is added into its PE's sum for v.
// Readout: address k = 0, 1, ... of the PE memories is read and cleared; for
// each node lane the adder tree adds the partial sums of node k*PEs+position
// and the result a_v is streamed out on out_valid/out_addr/out_a (out_addr is
// the node lane address k). Then out_commit and in_release are pulsed.
//
// Timing: max-lane-edges + 69 (readout of the deepest lane) + about 8 clocks
// per graph. After reset the PEs clear their memories (69 clocks) before the
// first graph is taken.
//
// Per-PE accumulation followed by a parallel adder tree follows the paper;
// the two-phase schedule and lockstep control are this design's choices.
module aggregate
  import gnn_pkg::*;
#(
  parameter int unsigned IBANKS = 2,
  localparam int unsigned IBW = (IBANKS > 1) ? $clog2(IBANKS) : 1
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // input memories (receiver index and e' of every edge)
  input  logic [IBW-1:0]                  in_wbank,
  input  logic [N_ELANE-1:0]              in_we,
  input  laddr_t [N_ELANE-1:0]            in_waddr,
  input  agg_rec_t [N_ELANE-1:0]          in_wdata,
  input  logic                            in_avail,
  input  logic [IBW-1:0]                  in_rbank,
  input  graph_sizes_t                    in_meta,
  output logic                            in_release,
  // aggregated features
  input  logic                            out_space,
  output logic                            out_commit,
  output graph_sizes_t                    out_meta,
  output logic [N_NLANE-1:0]              out_valid,
  output laddr_t [N_NLANE-1:0]            out_addr,
  output edge_vec_t [N_NLANE-1:0]         out_a,
  output logic                            busy,
  output logic [N_ELANE-1:0]              fwd_hit
);

  localparam int unsigned RDEPTH = (node_lane_depth(0) > node_lane_depth(4)) ?
                                   node_lane_depth(0) : node_lane_depth(4);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_ACC, S_GAP, S_READ, S_DRAIN, S_DONE} state_t;
  state_t       state;
  graph_sizes_t sizes;
  laddr_t       k;
  logic [2:0]   dcnt;
  logic [N_ELANE-1:0] init_done;

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
      state <= S_INIT; sizes <= '0; k <= '0; dcnt <= '0;
    end else begin
      case (state)
        S_INIT: if (&init_done) state <= S_IDLE;
        S_IDLE: if (in_avail && out_space) begin
          sizes <= in_meta; k <= '0; state <= S_ACC;
        end
        S_ACC: begin
          if (k + 1'b1 >= maxcnt) begin state <= S_GAP; dcnt <= '0; end
          else k <= k + 1'b1;
        end
        S_GAP: begin   // let the last read-modify-writes finish
          dcnt <= dcnt + 1'b1;
          if (dcnt == 3'd2) begin state <= S_READ; k <= '0; end
        end
        S_READ: begin
          if (int'(k) == RDEPTH-1) begin state <= S_DRAIN; dcnt <= '0; end
          else k <= k + 1'b1;
        end
        S_DRAIN: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == 3'd2) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_commit = (state == S_DONE);
  assign in_release = (state == S_DONE);
  assign out_meta   = sizes;
  assign busy       = (state != S_IDLE) && (state != S_INIT);

  logic   rd_en;
  assign  rd_en = (state == S_READ);
  logic   rd_v1;
  laddr_t rd_k1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rd_v1 <= 1'b0; rd_k1 <= '0; end
    else begin rd_v1 <= rd_en; rd_k1 <= k; end
  end

  // --------------------------------------------------------------- PEs
  edge_vec_t [N_ELANE-1:0][NODE_PE_A-1:0] pe_rd;

  for (genvar l = 0; l < N_ELANE; l++) begin : g_pe
    localparam int unsigned G   = elane_grp(l);
    localparam int unsigned DG  = egrp_dst(G);
    localparam int unsigned ED  = edge_lane_depth(G);
    localparam int unsigned EAW = $clog2(ED);
    localparam int unsigned NL  = node_pe(DG);

    agg_rec_t rec;
    logic     acc_v;
    pipo_ram #(.NBANKS(IBANKS), .DEPTH(ED), .W($bits(agg_rec_t))) u_imem (
      .clk, .we(in_we[l]), .wbank(in_wbank), .waddr(EAW'(in_waddr[l])), .wdata(in_wdata[l]),
      .rbank(in_rbank), .raddr(EAW'(k)), .rdata(rec));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) acc_v <= 1'b0;
      else        acc_v <= (state == S_ACC) && (k < cnt[l]);
    end

    edge_vec_t [NL-1:0] rd;
    aggregate_pe #(.NL(NL), .LDEPTH(node_lane_depth(DG))) u_pe (
      .clk, .rst_n, .init_done(init_done[l]),
      .acc_valid(acc_v), .acc_v(rec.v), .acc_e(rec.e),
      .rd_en(rd_en), .rd_addr(k), .rd_data(rd), .fwd_hit(fwd_hit[l]));

    always_comb begin
      pe_rd[l] = '0;
      for (int p = 0; p < NL; p++) pe_rd[l][p] = rd[p];
    end
  end

  // --------------------------------------------------- adder trees, out
  for (genvar nl = 0; nl < N_NLANE; nl++) begin : g_tree
    localparam int unsigned NG  = nlane_grp(nl);
    localparam int unsigned POS = nlane_pos(nl);
    localparam int unsigned M   = agg_fanin(NG);
    localparam int unsigned MM  = (M > 0) ? M : 1;

    edge_vec_t [MM-1:0] parts;
    edge_vec_t          sum;
    always_comb begin
      parts = '0;
      for (int m = 0; m < M; m++) parts[m] = pe_rd[agg_lane(NG, m)][POS];
    end
    adder_tree #(.N(M)) u_tree (.in(parts), .sum(sum));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[nl] <= 1'b0; out_addr[nl] <= '0; out_a[nl] <= '0;
      end else begin
        out_valid[nl] <= rd_v1 &&
                         (int'(rd_k1) < int'(lane_count(int'(sizes.n_nodes[NG]), POS, node_pe(NG))));
        out_addr[nl]  <= rd_k1;
        out_a[nl]     <= sum;
      end
    end
  end

endmodule
