// tb_edgeblock: checks the Edgeblock stage (first-Edgeblock configuration,
// NOUT = 4) with all 22 PEs. Two graphs (the first at full capacity) are
// written into the edge memories and node arrays (different banks); the
// stage must stream e' = MLP([x_i, x_j, e]) with i and j for every edge of
// every group, pulse commit and both releases once per graph with the
// graph's sizes, and take max-lane-edges + 7 clocks from start to release.
module tb_edgeblock;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  fx_t [EB1_NP-1:0] wts;
  logic [0:0] e_wbank = '0, e_rbank = '0, x_wbank = '0, x_rbank = '0;
  logic [N_ELANE-1:0] e_we = '0;
  laddr_t [N_ELANE-1:0] e_waddr = '0;
  edge_rec_t [N_ELANE-1:0] e_wdata = '0;
  logic e_avail = 1'b0, x_avail = 1'b0;
  graph_sizes_t e_meta = '0;
  logic e_release, x_release;
  logic [N_NLANE-1:0] x_we = '0;
  laddr_t [N_NLANE-1:0] x_waddr = '0;
  node_vec_t [N_NLANE-1:0] x_wdata = '0;
  logic out_space = 1'b1;
  logic out_commit;
  graph_sizes_t out_meta;
  logic [N_ELANE-1:0] out_valid;
  laddr_t [N_ELANE-1:0] out_addr;
  nidx_t [N_ELANE-1:0] out_i, out_j;
  fx_t [N_ELANE-1:0][EDGE_DIM-1:0] out_y;
  logic busy;

  edgeblock #(.NOUT(EDGE_DIM), .SIGMOID(1'b0), .EBANKS(2), .XBANKS(2)) dut (.*);

  int checks = 0, failures = 0;
  int w[];
  int nn [N_NGRP];
  int ne [N_EGRP];
  int xf [N_NGRP][138][NODE_DIM];
  int ei [N_EGRP][277];
  int ej [N_EGRP][277];
  int exe [N_EGRP][277][EDGE_DIM];
  bit seen [N_EGRP][277];
  int got = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N_ELANE; l++) if (out_valid[l]) begin
      int g, k;
      g = elane_grp(l);
      k = int'(out_addr[l]) * edge_pe(g) + elane_pos(l);
      checks++; got++;
      if (k >= ne[g] || seen[g][k]) begin failures++; $display("bad edge %0d/%0d", g, k); end
      else begin
        seen[g][k] = 1'b1;
        if (int'(out_i[l]) != ei[g][k] || int'(out_j[l]) != ej[g][k]) begin
          failures++; $display("i/j wrong");
        end
        for (int d = 0; d < EDGE_DIM; d++)
          if (int'(out_y[l][d]) != exe[g][k][d]) begin
            failures++; $display("group %0d edge %0d: %0d exp %0d", g, k, out_y[l][d], exe[g][k][d]);
          end
      end
    end
  end

  task automatic run_graph(int gi, int bank);
    int maxc = 0, t0, total = 0;
    int xi[], yo[];
    graph_sizes_t sz;
    sz = '0;
    foreach (seen[g, k]) seen[g][k] = 1'b0;
    for (int n = 0; n < N_NGRP; n++) begin
      nn[n] = (gi == 0) ? node_cap(n) : 1 + $urandom_range(node_cap(n) - 1);
      sz.n_nodes[n] = NCNT_W'(nn[n]);
      for (int v = 0; v < nn[n]; v++)
        for (int d = 0; d < NODE_DIM; d++) xf[n][v][d] = rnd(300);
    end
    for (int g = 0; g < N_EGRP; g++) begin
      ne[g] = (gi == 0) ? edge_cap(g) : $urandom_range(edge_cap(g));
      total += ne[g];
      sz.n_edges[g] = ECNT_W'(ne[g]);
      if (lane_count(ne[g], 0, edge_pe(g)) > maxc) maxc = lane_count(ne[g], 0, edge_pe(g));
    end
    for (int c = 0; c < 87; c++) begin
      @(negedge clk);
      e_wbank = 1'(bank); x_wbank = 1'(bank);
      for (int l = 0; l < N_ELANE; l++) begin
        int g, k;
        g = elane_grp(l); k = c * edge_pe(g) + elane_pos(l);
        e_we[l] = (k < ne[g]); e_waddr[l] = laddr_t'(c);
        if (k < ne[g]) begin
          ei[g][k] = $urandom_range(nn[egrp_src(g)] - 1);
          ej[g][k] = $urandom_range(nn[egrp_dst(g)] - 1);
          e_wdata[l].i = nidx_t'(ei[g][k]);
          e_wdata[l].j = nidx_t'(ej[g][k]);
          xi = new[EB_IN];
          for (int d = 0; d < NODE_DIM; d++) begin
            xi[d] = xf[egrp_src(g)][ei[g][k]][d];
            xi[NODE_DIM+d] = xf[egrp_dst(g)][ej[g][k]][d];
          end
          for (int d = 0; d < EDGE_DIM; d++) begin
            xi[2*NODE_DIM+d] = rnd(300);
            e_wdata[l].e[d] = fx_t'(xi[2*NODE_DIM+d]);
          end
          rmlp(w, EB_IN, EDGE_DIM, xi, yo);
          for (int d = 0; d < EDGE_DIM; d++) exe[g][k][d] = yo[d];
        end
      end
      for (int l = 0; l < N_NLANE; l++) begin
        int n, v;
        n = nlane_grp(l); v = c * node_pe(n) + nlane_pos(l);
        x_we[l] = (v < nn[n]); x_waddr[l] = laddr_t'(c);
        if (v < nn[n]) for (int d = 0; d < NODE_DIM; d++) x_wdata[l][d] = fx_t'(xf[n][v][d]);
      end
    end
    @(negedge clk);
    e_we = '0; x_we = '0;
    e_rbank = 1'(bank); x_rbank = 1'(bank); e_meta = sz;
    e_avail = 1'b1; x_avail = 1'b1;
    t0 = cyc;
    @(negedge clk);
    while (!e_release) @(negedge clk);
    checks += 3;
    if (!x_release || !out_commit) begin failures++; $display("release/commit not together"); end
    if (out_meta != sz) begin failures++; $display("meta wrong"); end
    if (cyc - t0 != maxc + 7) begin failures++; $display("stage time %0d, expected %0d", cyc - t0, maxc + 7); end
    e_avail = 1'b0; x_avail = 1'b0;
    @(negedge clk);
    checks++;
    if (got != total) begin failures++; $display("%0d outputs, expected %0d", got, total); end
    got = 0;
  endtask

  initial begin
    w = new[rnparam(EB_IN, EDGE_DIM)];
    foreach (w[a]) begin w[a] = rnd(50); wts[a] = fx_t'(w[a]); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_graph(0, 1);
    run_graph(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
