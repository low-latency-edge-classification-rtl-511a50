// tb_nodeblock_pe: checks the Nodeblock PE: [x_v, a_v] -> MLP 7-8-8-3, one
// node per clock, result and tag 3 clocks later, against the reference MLP.
module tb_nodeblock_pe;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  fx_t [NB_NP-1:0] wts;
  logic in_valid = 1'b0;
  node_vec_t in_x = '0;
  edge_vec_t in_a = '0;
  laddr_t in_tag = '0;
  logic out_valid;
  laddr_t out_tag;
  node_vec_t out_x;

  nodeblock_pe dut (.*);

  int checks = 0, failures = 0;
  int w[];
  int exp_q[$][];
  int tag_q[$];
  int cyc_q[$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e[];
    e = exp_q.pop_front();
    checks += 2;
    if (int'(out_tag) != tag_q.pop_front()) begin failures++; $display("tag mismatch"); end
    if (cyc - cyc_q.pop_front() != 3) begin failures++; $display("latency wrong"); end
    for (int d = 0; d < NODE_DIM; d++) begin
      checks++;
      if (int'(out_x[d]) != e[d]) begin failures++; $display("x'[%0d] %0d exp %0d", d, out_x[d], e[d]); end
    end
  end

  initial begin
    int xi[], yo[];
    w = new[rnparam(NB_IN, NODE_DIM)];
    foreach (w[a]) begin w[a] = rnd(60); wts[a] = fx_t'(w[a]); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      if (in_valid) begin
        xi = new[NB_IN];
        foreach (xi[i]) xi[i] = rnd(400);
        for (int d = 0; d < NODE_DIM; d++) in_x[d] = fx_t'(xi[d]);
        for (int d = 0; d < EDGE_DIM; d++) in_a[d] = fx_t'(xi[NODE_DIM+d]);
        in_tag = laddr_t'(n);
        rmlp(w, NB_IN, NODE_DIM, xi, yo);
        exp_q.push_back(yo); tag_q.push_back(n % 128); cyc_q.push_back(cyc);
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
