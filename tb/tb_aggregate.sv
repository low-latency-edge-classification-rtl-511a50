// tb_aggregate: checks the Aggregate stage with all 22 PEs and 15 adder
// trees. Three graphs (the first at full capacity) are written into the
// input memories (receiver index and e' per edge, with runs of equal
// receivers); for every node lane the stage must stream a_v, the sum of e'
// over all edges of all edge groups that end in that node (zero for group
// B1, which no edge enters), then pulse commit and release with the graph's
// sizes. Later graphs also show that the readout cleared the PE memories.
module tb_aggregate;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [0:0] in_wbank = '0, in_rbank = '0;
  logic [N_ELANE-1:0] in_we = '0;
  laddr_t [N_ELANE-1:0] in_waddr = '0;
  agg_rec_t [N_ELANE-1:0] in_wdata = '0;
  logic in_avail = 1'b0;
  graph_sizes_t in_meta = '0;
  logic in_release;
  logic out_space = 1'b1;
  logic out_commit;
  graph_sizes_t out_meta;
  logic [N_NLANE-1:0] out_valid;
  laddr_t [N_NLANE-1:0] out_addr;
  edge_vec_t [N_NLANE-1:0] out_a;
  logic busy;
  logic [N_ELANE-1:0] fwd_hit;

  aggregate dut (.*);

  int checks = 0, failures = 0, hits = 0;
  int nn [N_NGRP];
  int ne [N_EGRP];
  int sums [N_NGRP][138][EDGE_DIM];
  bit seen [N_NGRP][138];
  int got = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) hits += $countones(fwd_hit);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N_NLANE; l++) if (out_valid[l]) begin
      int n, v;
      n = nlane_grp(l);
      v = int'(out_addr[l]) * node_pe(n) + nlane_pos(l);
      checks++; got++;
      if (v >= nn[n] || seen[n][v]) begin failures++; $display("bad node %0d/%0d", n, v); end
      else begin
        seen[n][v] = 1'b1;
        for (int d = 0; d < EDGE_DIM; d++)
          if (int'(out_a[l][d]) != rsat(sums[n][v][d])) begin
            failures++; $display("group %0d node %0d: %0d exp %0d", n, v, out_a[l][d], sums[n][v][d]);
          end
      end
    end
  end

  task automatic run_graph(int gi, int bank);
    int maxc = 0;
    graph_sizes_t sz;
    int jv [N_EGRP][277];
    sz = '0;
    foreach (sums[n, v, d]) sums[n][v][d] = 0;
    foreach (seen[n, v]) seen[n][v] = 1'b0;
    for (int n = 0; n < N_NGRP; n++) begin
      nn[n] = (gi == 0) ? node_cap(n) : 1 + $urandom_range(node_cap(n) - 1);
      sz.n_nodes[n] = NCNT_W'(nn[n]);
    end
    for (int g = 0; g < N_EGRP; g++) begin
      ne[g] = (gi == 0) ? edge_cap(g) : $urandom_range(edge_cap(g));
      sz.n_edges[g] = ECNT_W'(ne[g]);
      if (lane_count(ne[g], 0, edge_pe(g)) > maxc) maxc = lane_count(ne[g], 0, edge_pe(g));
    end
    for (int c = 0; c < maxc; c++) begin
      @(negedge clk);
      in_wbank = 1'(bank);
      for (int l = 0; l < N_ELANE; l++) begin
        int g, k;
        g = elane_grp(l); k = c * edge_pe(g) + elane_pos(l);
        in_we[l] = (k < ne[g]); in_waddr[l] = laddr_t'(c);
        if (k < ne[g]) begin
          int t;
          t = egrp_dst(g);
          jv[g][k] = (k >= edge_pe(g) && $urandom_range(1) == 0) ? jv[g][k - edge_pe(g)]
                                                               : $urandom_range(nn[t] - 1);
          in_wdata[l].v = nidx_t'(jv[g][k]);
          for (int d = 0; d < EDGE_DIM; d++) begin
            int e;
            e = rnd(40);
            in_wdata[l].e[d] = fx_t'(e);
            sums[t][jv[g][k]][d] += e;
          end
        end
      end
    end
    @(negedge clk);
    in_we = '0;
    in_rbank = 1'(bank); in_meta = sz; in_avail = 1'b1;
    @(negedge clk);
    while (!in_release) @(negedge clk);
    checks += 2;
    if (!out_commit) begin failures++; $display("commit missing"); end
    if (out_meta != sz) begin failures++; $display("meta wrong"); end
    in_avail = 1'b0;
    @(negedge clk);
    begin
      int total = 0;
      for (int n = 0; n < N_NGRP; n++) total += nn[n];
      checks++;
      if (got != total) begin failures++; $display("%0d outputs, expected %0d", got, total); end
    end
    got = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_graph(0, 1);
    run_graph(1, 0);
    run_graph(2, 1);
    checks++;
    if (hits == 0) begin failures++; $display("forwarding never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
