// tb_pipo_ctrl: checks the graph-level FIFO control with depth 3 against a
// queue model: random commits and releases (only when allowed), bank
// numbers in round-robin order, the sizes tag (meta) travelling with each
// entry, the full and empty flags, and simultaneous commit and release.
module tb_pipo_ctrl;
  localparam int NB = 3, MW = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic wr_space, wr_commit = 1'b0, rd_avail, rd_release = 1'b0;
  logic [1:0] wr_bank, rd_bank;
  logic [MW-1:0] wr_meta = '0, rd_meta;
  logic [1:0] count;

  pipo_ctrl #(.NBANKS(NB), .META_W(MW)) dut (.*);

  int checks = 0, failures = 0;
  int q_meta[$], q_bank[$];
  int wb = 0;
  int nfull = 0, nboth = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      checks += 4;
      if (wr_space != (q_meta.size() < NB)) begin failures++; $display("wr_space wrong"); end
      if (rd_avail != (q_meta.size() > 0)) begin failures++; $display("rd_avail wrong"); end
      if (int'(count) != q_meta.size()) begin failures++; $display("count wrong"); end
      if (int'(wr_bank) != wb) begin failures++; $display("wr_bank %0d exp %0d", wr_bank, wb); end
      if (q_meta.size() > 0) begin
        checks += 2;
        if (int'(rd_meta) != q_meta[0]) begin failures++; $display("meta wrong"); end
        if (int'(rd_bank) != q_bank[0]) begin failures++; $display("rd_bank wrong"); end
      end
      if (q_meta.size() == NB) nfull++;
      wr_commit  = wr_space && ($urandom_range(2) != 0);
      rd_release = rd_avail && ($urandom_range(((t / 400) % 2 == 0) ? 3 : 1) == 0);
      wr_meta    = MW'($urandom);
      if (wr_commit && rd_release) nboth++;
      @(posedge clk);
      if (rd_release) begin void'(q_meta.pop_front()); void'(q_bank.pop_front()); end
      if (wr_commit) begin q_meta.push_back(int'(wr_meta)); q_bank.push_back(wb); wb = (wb + 1) % NB; end
    end
    checks += 2;
    if (nfull == 0) begin failures++; $display("never full"); end
    if (nboth == 0) begin failures++; $display("never commit and release together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
