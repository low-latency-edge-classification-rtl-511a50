// tb_mlp: checks the 3-layer MLP (10 -> 8 -> 8 -> 4) against the integer
// reference: random weights and a stream of random inputs, one per clock,
// results expected exactly 3 clocks later, in order, one per clock.
module tb_mlp;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NIN = 10, NOUT = 4, NVEC = 200;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid = 1'b0;
  fx_t [NIN-1:0] x = '0;
  fx_t [mlp_nparam(NIN, NOUT)-1:0] wts;
  logic out_valid;
  fx_t [NOUT-1:0] y;

  mlp #(.NIN(NIN), .NOUT(NOUT)) dut (.*);

  int checks = 0, failures = 0;
  int w[];
  int exp_q[$][];
  int in_cyc[$];
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
    int c;
    e = exp_q.pop_front();
    c = in_cyc.pop_front();
    checks++;
    if (cyc - c != 3) begin failures++; $display("latency %0d", cyc - c); end
    for (int o = 0; o < NOUT; o++) begin
      checks++;
      if (int'(y[o]) != e[o]) begin
        failures++; $display("out %0d: %0d expected %0d", o, y[o], e[o]);
      end
    end
  end

  initial begin
    int xi[], yo[];
    int nout = 0;
    w = new[rnparam(NIN, NOUT)];
    foreach (w[a]) begin w[a] = rnd(60); wts[a] = fx_t'(w[a]); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NVEC; n++) begin
      @(negedge clk);
      xi = new[NIN];
      // every 10th vector uses large values to reach saturation
      foreach (xi[i]) begin xi[i] = (n % 10 == 0) ? rnd(8000) : rnd(300); x[i] = fx_t'(xi[i]); end
      rmlp(w, NIN, NOUT, xi, yo);
      exp_q.push_back(yo);
      in_cyc.push_back(cyc);
      in_valid = 1'b1;
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
