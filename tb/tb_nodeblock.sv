// tb_nodeblock: checks the Nodeblock stage with all 15 PEs. Two graphs of
// random size (the first at full capacity) are placed in banks of the node
// channel (5 banks) and the aggregate channel (2 banks); the stage must not
// start while the output channel is full, then must stream x' = MLP([x, a])
// for every node of every group, pulse commit and both releases once per
// graph with the graph's sizes, and take max-lane-nodes + 7 clocks.
module tb_nodeblock;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  fx_t [NB_NP-1:0] wts;
  logic [2:0] x_wbank = '0, x_rbank = '0;
  logic [N_NLANE-1:0] x_we = '0;
  laddr_t [N_NLANE-1:0] x_waddr = '0;
  node_vec_t [N_NLANE-1:0] x_wdata = '0;
  logic x_avail = 1'b0;
  graph_sizes_t x_meta = '0;
  logic x_release;
  logic [0:0] a_wbank = '0, a_rbank = '0;
  logic [N_NLANE-1:0] a_we = '0;
  laddr_t [N_NLANE-1:0] a_waddr = '0;
  edge_vec_t [N_NLANE-1:0] a_wdata = '0;
  logic a_avail = 1'b0;
  logic a_release;
  logic out_space = 1'b0;
  logic out_commit;
  graph_sizes_t out_meta;
  logic [N_NLANE-1:0] out_valid;
  laddr_t [N_NLANE-1:0] out_addr;
  node_vec_t [N_NLANE-1:0] out_x;
  logic busy;

  nodeblock dut (.*);

  int checks = 0, failures = 0;
  int w[];
  int nn [N_NGRP];
  int expx [N_NGRP][138][NODE_DIM];
  bit seen [N_NGRP][138];
  int got = 0, commits = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
        for (int d = 0; d < NODE_DIM; d++)
          if (int'(out_x[l][d]) != expx[n][v][d]) begin
            failures++; $display("group %0d node %0d: %0d exp %0d", n, v, out_x[l][d], expx[n][v][d]);
          end
      end
    end
    if (out_commit) commits++;
  end

  task automatic run_graph(int gi, int xb, int ab);
    int maxc = 0, t0;
    int xi[], yo[];
    graph_sizes_t sz;
    sz = '0;
    for (int n = 0; n < N_NGRP; n++) begin
      nn[n] = (gi == 0) ? node_cap(n) : $urandom_range(node_cap(n));
      sz.n_nodes[n] = NCNT_W'(nn[n]);
      if (lane_count(nn[n], 0, node_pe(n)) > maxc) maxc = lane_count(nn[n], 0, node_pe(n));
      for (int v = 0; v < 138; v++) seen[n][v] = 1'b0;
    end
    for (int c = 0; c < 69; c++) begin
      @(negedge clk);
      x_wbank = 3'(xb); a_wbank = 1'(ab);
      for (int l = 0; l < N_NLANE; l++) begin
        int n, v;
        n = nlane_grp(l); v = c * node_pe(n) + nlane_pos(l);
        x_we[l] = (v < nn[n]); a_we[l] = (v < nn[n]);
        x_waddr[l] = laddr_t'(c); a_waddr[l] = laddr_t'(c);
        if (v < nn[n]) begin
          xi = new[NB_IN];
          foreach (xi[i]) xi[i] = rnd(300);
          for (int d = 0; d < NODE_DIM; d++) x_wdata[l][d] = fx_t'(xi[d]);
          for (int d = 0; d < EDGE_DIM; d++) a_wdata[l][d] = fx_t'(xi[NODE_DIM+d]);
          rmlp(w, NB_IN, NODE_DIM, xi, yo);
          for (int d = 0; d < NODE_DIM; d++) expx[n][v][d] = yo[d];
        end
      end
    end
    @(negedge clk);
    x_we = '0; a_we = '0;
    x_rbank = 3'(xb); a_rbank = 1'(ab); x_meta = sz;
    x_avail = 1'b1; a_avail = 1'b1; out_space = 1'b0;
    repeat (5) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("started without output space"); end
    out_space = 1'b1;
    t0 = cyc;
    @(negedge clk);
    while (!x_release) @(negedge clk);
    checks += 4;
    if (!a_release || !out_commit) begin failures++; $display("release/commit not together"); end
    if (out_meta != sz) begin failures++; $display("meta wrong"); end
    if (cyc - t0 != maxc + 6) begin failures++; $display("stage time %0d, expected %0d", cyc - t0, maxc + 6); end
    x_avail = 1'b0; a_avail = 1'b0;
    @(negedge clk);
    begin
      int total = 0;
      for (int n = 0; n < N_NGRP; n++) total += nn[n];
      if (got != total) begin failures++; $display("%0d outputs, expected %0d", got, total); end
    end
    got = 0;
  endtask

  initial begin
    w = new[rnparam(NB_IN, NODE_DIM)];
    foreach (w[a]) begin w[a] = rnd(50); wts[a] = fx_t'(w[a]); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run_graph(0, 3, 1);
    run_graph(1, 4, 0);
    checks++;
    if (commits != 2) begin failures++; $display("%0d commits", commits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
