// tb_edgeblock_pe: checks an Edgeblock PE whose sender group has 2 node
// lanes (138 nodes) and receiver group 1 lane (62 nodes), with 2 banks.
// Bank 0 and bank 1 of the node arrays are filled with different features,
// then random edges stream through, one per clock with gaps, reading bank 1.
// Each result (e' of 4 values, i, j, tag) is checked against the reference
// MLP on [x_i, x_j, e], 4 clocks after the edge went in. A second instance
// with NOUT = 1 and the hard sigmoid is checked the same way.
module tb_edgeblock_pe;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [0:0] wbank = '0, rbank = '0;
  logic [1:0] src_we = '0;
  laddr_t [1:0] src_waddr = '0;
  node_vec_t [1:0] src_wdata = '0;
  logic [0:0] dst_we = '0;
  laddr_t [0:0] dst_waddr = '0;
  node_vec_t [0:0] dst_wdata = '0;
  fx_t [EB1_NP-1:0] wts;
  fx_t [EB2_NP-1:0] wts2;
  logic in_valid = 1'b0;
  edge_rec_t in_rec = '0;
  laddr_t in_tag = '0;
  logic out_valid, out_valid2;
  nidx_t out_i, out_j, out_i2, out_j2;
  laddr_t out_tag, out_tag2;
  fx_t [EDGE_DIM-1:0] out_y;
  fx_t [0:0] out_y2;

  edgeblock_pe #(.SRC_LANES(2), .SRC_LDEPTH(69), .DST_LANES(1), .DST_LDEPTH(62),
                 .NBANKS(2), .NOUT(EDGE_DIM), .SIGMOID(1'b0)) dut (.*);
  edgeblock_pe #(.SRC_LANES(2), .SRC_LDEPTH(69), .DST_LANES(1), .DST_LDEPTH(62),
                 .NBANKS(2), .NOUT(1), .SIGMOID(1'b1)) dut2 (
    .clk, .rst_n, .wbank, .src_we, .src_waddr, .src_wdata, .dst_we, .dst_waddr, .dst_wdata,
    .rbank, .wts(wts2), .in_valid, .in_rec, .in_tag,
    .out_valid(out_valid2), .out_i(out_i2), .out_j(out_j2), .out_tag(out_tag2), .out_y(out_y2));

  int checks = 0, failures = 0;
  int w[], w2[];
  int xs [2][138][NODE_DIM];
  int xd [2][62][NODE_DIM];
  int exp_q[$][];
  int exp2_q[$];
  int meta_q[$];
  int cyc_q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (out_valid != out_valid2) begin failures++; $display("valid mismatch"); end
    if (out_valid) begin
      int e[];
      int m, s;
      e = exp_q.pop_front();
      m = meta_q.pop_front();
      s = exp2_q.pop_front();
      checks += 3;
      begin int c0; c0 = cyc_q.pop_front(); if (cyc - c0 != 4) begin failures++; $display("latency %0d", cyc - c0); end end
      if ({out_i, out_j, out_tag} != 23'(m)) begin failures++; $display("i/j/tag wrong"); end
      if (int'(out_y2[0]) != s) begin failures++; $display("score %0d exp %0d", out_y2[0], s); end
      for (int d = 0; d < EDGE_DIM; d++) begin
        checks++;
        if (int'(out_y[d]) != e[d]) begin failures++; $display("e'[%0d] %0d exp %0d", d, out_y[d], e[d]); end
      end
    end
  end

  initial begin
    int xi[], yo[], y2[];
    w = new[rnparam(EB_IN, EDGE_DIM)];
    w2 = new[rnparam(EB_IN, 1)];
    foreach (w[a]) begin w[a] = rnd(50); wts[a] = fx_t'(w[a]); end
    foreach (w2[a]) begin w2[a] = rnd(50); wts2[a] = fx_t'(w2[a]); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 2; b++)
      for (int k = 0; k < 69; k++) begin
        @(negedge clk);
        wbank = 1'(b);
        for (int p = 0; p < 2; p++) begin
          src_we[p] = 1'b1; src_waddr[p] = laddr_t'(k);
          for (int d = 0; d < NODE_DIM; d++) begin
            xs[b][2*k+p][d] = rnd(300);
            src_wdata[p][d] = fx_t'(xs[b][2*k+p][d]);
          end
        end
        dst_we[0] = (k < 62); dst_waddr[0] = laddr_t'(k);
        for (int d = 0; d < NODE_DIM; d++) begin
          if (k < 62) xd[b][k][d] = rnd(300);
          dst_wdata[0][d] = fx_t'(xd[b][k % 62][d]);
        end
      end
    @(negedge clk) begin src_we = '0; dst_we = '0; rbank = 1'b1; end
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      if (in_valid) begin
        int i, j;
        i = $urandom_range(137); j = $urandom_range(61);
        in_rec.i = nidx_t'(i); in_rec.j = nidx_t'(j); in_tag = laddr_t'(n);
        xi = new[EB_IN];
        for (int d = 0; d < NODE_DIM; d++) begin xi[d] = xs[1][i][d]; xi[NODE_DIM+d] = xd[1][j][d]; end
        for (int d = 0; d < EDGE_DIM; d++) begin xi[2*NODE_DIM+d] = rnd(300); in_rec.e[d] = fx_t'(xi[2*NODE_DIM+d]); end
        rmlp(w, EB_IN, EDGE_DIM, xi, yo);
        rmlp(w2, EB_IN, 1, xi, y2);
        exp_q.push_back(yo);
        exp2_q.push_back(rhsig(y2[0]));
        meta_q.push_back((i << 15) | (j << 7) | (n % 128));
        cyc_q.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
