// tb_adder_tree: checks the adder tree for 4 and 3 inputs and the empty
// (0-input) case against an integer sum, with values small enough not to
// saturate and with values that saturate every adder (largest inputs).
module tb_adder_tree;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  edge_vec_t [3:0] in4;
  edge_vec_t [2:0] in3;
  edge_vec_t [0:0] in0;
  edge_vec_t s4, s3, s0;

  adder_tree #(.N(4)) u4 (.in(in4), .sum(s4));
  adder_tree #(.N(3)) u3 (.in(in3), .sum(s3));
  adder_tree #(.N(0)) u0 (.in(in0), .sum(s0));

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int m;
      m = (t % 5 == 0) ? 8192 : 2000;
      for (int k = 0; k < 4; k++)
        for (int d = 0; d < EDGE_DIM; d++) in4[k][d] = fx_t'((t % 7 == 0) ? 8191 : rnd(m - 1));
      for (int k = 0; k < 3; k++)
        for (int d = 0; d < EDGE_DIM; d++) in3[k][d] = fx_t'(rnd(m - 1));
      in0 = edge_vec_t'($urandom);
      #1;
      for (int d = 0; d < EDGE_DIM; d++) begin
        int e4, e3;
        e4 = radd(radd(int'(in4[0][d]), int'(in4[1][d])), radd(int'(in4[2][d]), int'(in4[3][d])));
        e3 = radd(radd(int'(in3[0][d]), int'(in3[1][d])), int'(in3[2][d]));
        checks += 3;
        if (int'(s4[d]) != e4) begin failures++; $display("N=4 sum %0d exp %0d", s4[d], e4); end
        if (int'(s3[d]) != e3) begin failures++; $display("N=3 sum %0d exp %0d", s3[d], e3); end
        if (s0[d] != 0) begin failures++; $display("N=0 sum not zero"); end
      end
      #9;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
