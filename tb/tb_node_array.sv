// tb_node_array: checks a 2-lane node array with 2 banks: both lanes write
// in the same clock (node 2k+p by lane p at address k), then every node of
// both banks is read back by node index with one clock of latency.
module tb_node_array;
  import gnn_pkg::*;

  localparam int NL = 2, LD = 69, NB = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [0:0] wbank = '0, rbank = '0;
  logic [NL-1:0] we = '0;
  laddr_t [NL-1:0] waddr = '0;
  node_vec_t [NL-1:0] wdata = '0;
  nidx_t ridx = '0;
  node_vec_t rdata;

  node_array #(.NLANES(NL), .LDEPTH(LD), .NBANKS(NB)) dut (.*);

  int checks = 0, failures = 0;
  node_vec_t ref_mem [NB][NL*LD];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < LD; k++) begin
        @(negedge clk);
        wbank = 1'(b);
        for (int p = 0; p < NL; p++) begin
          we[p] = 1'b1; waddr[p] = laddr_t'(k);
          wdata[p] = node_vec_t'({$urandom, $urandom});
          ref_mem[b][k*NL+p] = wdata[p];
        end
      end
    @(negedge clk) we = '0;
    for (int t = 0; t < 600; t++) begin
      int b, v;
      b = $urandom_range(NB-1);
      v = $urandom_range(NL*LD-1);
      @(negedge clk);
      rbank = 1'(b); ridx = nidx_t'(v);
      @(negedge clk);
      checks++;
      if (rdata != ref_mem[b][v]) begin failures++; $display("bank %0d node %0d wrong", b, v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
