// tb_aggregate_pe: checks an Aggregate PE with 2 sub-memories (138 nodes).
// After the reset clear, several rounds each stream random edges one per
// clock (with runs of equal receivers to exercise the Edge Reg / Index Reg
// forwarding, and idle gaps), then read every address out; each node's sum
// must equal the integer sum of its edges, and the readout must leave the
// memory cleared for the next round.
module tb_aggregate_pe;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NL = 2, LD = 69, NN = NL*LD;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic init_done;
  logic acc_valid = 1'b0;
  nidx_t acc_v = '0;
  edge_vec_t acc_e = '0;
  logic rd_en = 1'b0;
  laddr_t rd_addr = '0;
  edge_vec_t [NL-1:0] rd_data;
  logic fwd_hit;

  aggregate_pe #(.NL(NL), .LDEPTH(LD)) dut (.*);

  int checks = 0, failures = 0, hits = 0;
  int sums [NN][EDGE_DIM];

  always @(posedge clk) if (rst_n && fwd_hit) hits++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (init_done);
    for (int r = 0; r < 4; r++) begin
      foreach (sums[a, d]) sums[a][d] = 0;
      v = 0;
      for (int n = 0; n < 400; n++) begin
        @(negedge clk);
        acc_valid = ($urandom_range(5) != 0);
        if (acc_valid) begin
          if ($urandom_range(2) != 0) v = $urandom_range(NN-1);
          acc_v = nidx_t'(v);
          for (int d = 0; d < EDGE_DIM; d++) begin
            int e;
            e = rnd(60);
            acc_e[d] = fx_t'(e);
            sums[v][d] += e;
          end
        end
      end
      @(negedge clk) acc_valid = 1'b0;
      @(negedge clk);
      for (int k = 0; k < LD; k++) begin
        rd_en = 1'b1; rd_addr = laddr_t'(k);
        @(negedge clk);
        rd_en = 1'b0;
        for (int p = 0; p < NL; p++)
          for (int d = 0; d < EDGE_DIM; d++) begin
            checks++;
            if (int'(rd_data[p][d]) != rsat(sums[k*NL+p][d])) begin
              failures++;
              $display("round %0d node %0d dim %0d: %0d exp %0d", r, k*NL+p, d, rd_data[p][d], sums[k*NL+p][d]);
            end
          end
      end
    end
    checks++;
    if (hits == 0) begin failures++; $display("forwarding never used"); end
    $display("forwarding hits %0d", hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
