// tb_gnn_top: end-to-end test of the whole accelerator at its full size.
//
// Loads random weights into the three MLPs, then pushes NGRAPH graphs
// back to back: graph 0 fills every node and edge group to capacity
// (138/62 nodes, 277/77/87 edges per group), the others have random sizes.
// Every edge score is compared with an integer reference model of the
// network. The test also measures latency (commit to last score) and the
// interval between finished graphs, and counts the mechanisms the design
// relies on: loader stalls while the input channels are full, forwarding
// from the Edge Reg in the Aggregate PEs, several graphs in flight in
// different stages, and a stage held back by a full channel after it.
module tb_gnn_top;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NGRAPH = 4;
  localparam int MAXN = 138;
  localparam int MAXE = 277;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    w_we = 1'b0;
  logic [1:0]              w_sel = '0;
  logic [9:0]              w_addr = '0;
  fx_t                     w_data = '0;
  logic                    in_ready;
  logic [N_ELANE-1:0]      in_edge_we = '0;
  laddr_t [N_ELANE-1:0]    in_edge_addr = '0;
  edge_rec_t [N_ELANE-1:0] in_edge_rec = '0;
  logic [N_NLANE-1:0]      in_node_we = '0;
  laddr_t [N_NLANE-1:0]    in_node_addr = '0;
  node_vec_t [N_NLANE-1:0] in_node_x = '0;
  logic                    in_commit = 1'b0;
  graph_sizes_t            in_sizes = '0;
  logic [N_ELANE-1:0]      out_valid;
  eidx_t [N_ELANE-1:0]     out_idx;
  fx_t [N_ELANE-1:0]       out_score;
  logic                    out_graph_done;

  gnn_top dut (.*);

  int checks = 0, failures = 0;

  // ------------------------------------------------------------- data
  int wt_eb1[], wt_nb[], wt_eb2[];
  int nn [NGRAPH][N_NGRP];
  int ne [NGRAPH][N_EGRP];
  int xf [NGRAPH][N_NGRP][MAXN][NODE_DIM];
  int ei [NGRAPH][N_EGRP][MAXE];
  int ej [NGRAPH][N_EGRP][MAXE];
  int ef [NGRAPH][N_EGRP][MAXE][EDGE_DIM];
  int exps [NGRAPH][N_EGRP][MAXE];
  bit seen [NGRAPH][N_EGRP][MAXE];

  task automatic make_graph(int gi);
    for (int n = 0; n < N_NGRP; n++) begin
      nn[gi][n] = (gi == 0) ? node_cap(n) : 1 + $urandom_range(node_cap(n) - 1);
      for (int v = 0; v < nn[gi][n]; v++)
        for (int d = 0; d < NODE_DIM; d++) xf[gi][n][v][d] = rnd(128);
    end
    for (int g = 0; g < N_EGRP; g++) begin
      int s = egrp_src(g), t = egrp_dst(g), np = edge_pe(g);
      ne[gi][g] = (gi == 0) ? edge_cap(g) : $urandom_range(edge_cap(g));
      for (int k = 0; k < ne[gi][g]; k++) begin
        ei[gi][g][k] = $urandom_range(nn[gi][s] - 1);
        // same receiver as the previous edge of this lane now and then
        if (k >= np && $urandom_range(2) == 0) ej[gi][g][k] = ej[gi][g][k-np];
        else ej[gi][g][k] = $urandom_range(nn[gi][t] - 1);
        for (int d = 0; d < EDGE_DIM; d++) ef[gi][g][k][d] = rnd(128);
      end
    end
  endtask

  task automatic reference(int gi);
    int e1 [N_EGRP][MAXE][EDGE_DIM];
    int av [N_NGRP][MAXN][EDGE_DIM];
    int xp [N_NGRP][MAXN][NODE_DIM];
    int x[], y[];
    for (int n = 0; n < N_NGRP; n++)
      for (int v = 0; v < MAXN; v++)
        for (int d = 0; d < EDGE_DIM; d++) av[n][v][d] = 0;
    for (int g = 0; g < N_EGRP; g++)
      for (int k = 0; k < ne[gi][g]; k++) begin
        x = new[EB_IN];
        for (int d = 0; d < NODE_DIM; d++) begin
          x[d] = xf[gi][egrp_src(g)][ei[gi][g][k]][d];
          x[NODE_DIM+d] = xf[gi][egrp_dst(g)][ej[gi][g][k]][d];
        end
        for (int d = 0; d < EDGE_DIM; d++) x[2*NODE_DIM+d] = ef[gi][g][k][d];
        rmlp(wt_eb1, EB_IN, EDGE_DIM, x, y);
        for (int d = 0; d < EDGE_DIM; d++) begin
          e1[g][k][d] = y[d];
          av[egrp_dst(g)][ej[gi][g][k]][d] = radd(av[egrp_dst(g)][ej[gi][g][k]][d], y[d]);
        end
      end
    for (int n = 0; n < N_NGRP; n++)
      for (int v = 0; v < nn[gi][n]; v++) begin
        x = new[NB_IN];
        for (int d = 0; d < NODE_DIM; d++) x[d] = xf[gi][n][v][d];
        for (int d = 0; d < EDGE_DIM; d++) x[NODE_DIM+d] = av[n][v][d];
        rmlp(wt_nb, NB_IN, NODE_DIM, x, y);
        for (int d = 0; d < NODE_DIM; d++) xp[n][v][d] = y[d];
      end
    for (int g = 0; g < N_EGRP; g++)
      for (int k = 0; k < ne[gi][g]; k++) begin
        x = new[EB_IN];
        for (int d = 0; d < NODE_DIM; d++) begin
          x[d] = xp[egrp_src(g)][ei[gi][g][k]][d];
          x[NODE_DIM+d] = xp[egrp_dst(g)][ej[gi][g][k]][d];
        end
        for (int d = 0; d < EDGE_DIM; d++) x[2*NODE_DIM+d] = e1[g][k][d];
        rmlp(wt_eb2, EB_IN, OUT_DIM, x, y);
        exps[gi][g][k] = rhsig(y[0]);
        seen[gi][g][k] = 1'b0;
      end
  endtask

  // ------------------------------------------------------ weight load
  task automatic load_weights(int sel, ref int w[]);
    for (int a = 0; a < w.size(); a++) begin
      @(negedge clk);
      w_we = 1'b1; w_sel = 2'(sel); w_addr = 10'(a); w_data = fx_t'(w[a]);
    end
    @(negedge clk) w_we = 1'b0;
  endtask

  // ------------------------------------------------------- graph load
  int commit_cyc [NGRAPH];
  int done_cyc [NGRAPH];
  int cyc = 0;
  int stall_cycles = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic load_graph(int gi);
    int maxc = 0;
    for (int g = 0; g < N_EGRP; g++)
      if (lane_count(ne[gi][g], 0, edge_pe(g)) > maxc) maxc = lane_count(ne[gi][g], 0, edge_pe(g));
    for (int n = 0; n < N_NGRP; n++)
      if (lane_count(nn[gi][n], 0, node_pe(n)) > maxc) maxc = lane_count(nn[gi][n], 0, node_pe(n));
    @(negedge clk);
    while (!in_ready) begin stall_cycles++; @(negedge clk); end
    for (int c = 0; c < maxc; c++) begin
      for (int l = 0; l < N_ELANE; l++) begin
        int g = elane_grp(l), k = c*edge_pe(elane_grp(l)) + elane_pos(l);
        in_edge_we[l] = (k < ne[gi][g]);
        in_edge_addr[l] = laddr_t'(c);
        if (k < ne[gi][g]) begin
          in_edge_rec[l].i = nidx_t'(ei[gi][g][k]);
          in_edge_rec[l].j = nidx_t'(ej[gi][g][k]);
          for (int d = 0; d < EDGE_DIM; d++) in_edge_rec[l].e[d] = fx_t'(ef[gi][g][k][d]);
        end
      end
      for (int l = 0; l < N_NLANE; l++) begin
        int n = nlane_grp(l), v = c*node_pe(nlane_grp(l)) + nlane_pos(l);
        in_node_we[l] = (v < nn[gi][n]);
        in_node_addr[l] = laddr_t'(c);
        if (v < nn[gi][n])
          for (int d = 0; d < NODE_DIM; d++) in_node_x[l][d] = fx_t'(xf[gi][n][v][d]);
      end
      @(negedge clk);
    end
    in_edge_we = '0; in_node_we = '0;
    for (int n = 0; n < N_NGRP; n++) in_sizes.n_nodes[n] = NCNT_W'(nn[gi][n]);
    for (int g = 0; g < N_EGRP; g++) in_sizes.n_edges[g] = ECNT_W'(ne[gi][g]);
    in_commit = 1'b1;
    commit_cyc[gi] = cyc;
    @(negedge clk) in_commit = 1'b0;
  endtask

  // ---------------------------------------------------- result check
  int out_graph = 0;
  int got [NGRAPH];
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N_ELANE; l++) if (out_valid[l]) begin
      int g, k;
      g = elane_grp(l);
      k = int'(out_idx[l]);
      checks++;
      if (out_graph >= NGRAPH || k >= ne[out_graph][g]) begin
        failures++;
        $display("unexpected score lane %0d idx %0d", l, k);
      end else begin
        got[out_graph]++;
        if (seen[out_graph][g][k]) begin
          failures++; $display("duplicate score g%0d k%0d", g, k);
        end
        seen[out_graph][g][k] = 1'b1;
        if (int'(out_score[l]) != exps[out_graph][g][k]) begin
          failures++;
          $display("graph %0d group %0d edge %0d: score %0d, expected %0d",
                   out_graph, g, k, out_score[l], exps[out_graph][g][k]);
        end
      end
    end
    if (out_graph_done) begin
      if (out_graph < NGRAPH) done_cyc[out_graph] = cyc;
      out_graph++;
    end
  end

  // ------------------------------------------------- mechanism counters
  int fwd_hits = 0, overlap_cycles = 0, backpressure_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    int nbusy;
    fwd_hits += $countones(dut.u_agg.fwd_hit);
    nbusy = int'(dut.u_eb1.busy) + int'(dut.u_agg.busy) + int'(dut.u_nb.busy) + int'(dut.u_eb2.busy);
    if (nbusy >= 2) overlap_cycles++;
    // a stage with a graph waiting but no room after it
    if ((dut.u_eb1.state == 0 && dut.in_av && !(dut.ea_sp && dut.ee_sp)) ||
        (dut.u_agg.state == 1 && dut.ea_av && !dut.av_sp) ||
        (dut.u_nb.state == 0 && dut.xn_av && dut.av_av && !dut.xp_sp))
      backpressure_cycles++;
  end

  // --------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    wt_eb1 = new[rnparam(EB_IN, EDGE_DIM)];
    wt_nb  = new[rnparam(NB_IN, NODE_DIM)];
    wt_eb2 = new[rnparam(EB_IN, OUT_DIM)];
    foreach (wt_eb1[a]) wt_eb1[a] = rnd(40);
    foreach (wt_nb[a])  wt_nb[a]  = rnd(40);
    foreach (wt_eb2[a]) wt_eb2[a] = rnd(64);
    for (int gi = 0; gi < NGRAPH; gi++) begin
      make_graph(gi);
      reference(gi);
      got[gi] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_weights(0, wt_eb1);
    load_weights(1, wt_nb);
    load_weights(2, wt_eb2);
    for (int gi = 0; gi < NGRAPH; gi++) load_graph(gi);
    wait (out_graph == NGRAPH);
    repeat (20) @(posedge clk);
    for (int gi = 0; gi < NGRAPH; gi++) begin
      total = 0;
      for (int g = 0; g < N_EGRP; g++) total += ne[gi][g];
      checks++;
      if (got[gi] != total) begin
        failures++;
        $display("graph %0d: %0d scores, expected %0d", gi, got[gi], total);
      end
      $display("graph %0d: %0d edges, latency %0d cycles", gi, total, done_cyc[gi] - commit_cyc[gi]);
    end
    // full-size graph: latency bound of this implementation
    // (EB1 87+8, Aggregate 87+69+9, Nodeblock 69+7, EB2 87+8, plus hand-overs)
    checks++;
    if (done_cyc[0] - commit_cyc[0] > 460) begin
      failures++;
      $display("full-size latency %0d above 460 cycles", done_cyc[0] - commit_cyc[0]);
    end
    for (int gi = 1; gi < NGRAPH; gi++)
      $display("interval graph %0d -> %0d: %0d cycles", gi-1, gi, done_cyc[gi] - done_cyc[gi-1]);
    $display("loader stall cycles %0d, aggregate forwarding hits %0d, overlap cycles %0d, backpressure cycles %0d",
             stall_cycles, fwd_hits, overlap_cycles, backpressure_cycles);
    checks += 4;
    if (stall_cycles == 0)        begin failures++; $display("loader never stalled"); end
    if (fwd_hits == 0)            begin failures++; $display("no aggregate forwarding"); end
    if (overlap_cycles == 0)      begin failures++; $display("stages never overlapped"); end
    if (backpressure_cycles == 0) begin failures++; $display("no stage was held back by a full channel"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
