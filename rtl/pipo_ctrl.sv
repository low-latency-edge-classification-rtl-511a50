// pipo_ctrl: token control of one graph-level FIFO channel ("Qn") between two
// dataflow functions.
//
// A channel holds up to NBANKS whole graphs, each in its own bank of the
// channel memories. The producer fills bank wr_bank while wr_space is high
// and then pulses wr_commit together with wr_meta (the graph's sizes); the
// consumer works on bank rd_bank while rd_avail is high, sees the graph's
// sizes on rd_meta, and pulses rd_release when done. Banks are used in
// round-robin order, so graphs leave in the order they came. A commit and a
// release in the same clock are both taken.
//
// The depths n of the channels (2, 3, 5) are those printed in the pipeline
// drawing; holding a whole graph per entry, like the ping-pong buffers of a
// high-level-synthesis dataflow design, is this design's reading of them.
module pipo_ctrl #(
  parameter int unsigned NBANKS = 2,
  parameter int unsigned META_W = 8,
  localparam int unsigned BW = (NBANKS > 1) ? $clog2(NBANKS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // producer side
  output logic              wr_space,
  output logic [BW-1:0]     wr_bank,
  input  logic              wr_commit,
  input  logic [META_W-1:0] wr_meta,
  // consumer side
  output logic              rd_avail,
  output logic [BW-1:0]     rd_bank,
  output logic [META_W-1:0] rd_meta,
  input  logic              rd_release,
  output logic [$clog2(NBANKS+1)-1:0] count
);

  logic [META_W-1:0] meta [NBANKS];

  function automatic logic [BW-1:0] nxt(logic [BW-1:0] b);
    return (b == BW'(NBANKS-1)) ? '0 : b + 1'b1;
  endfunction

  assign wr_space = (count < ($clog2(NBANKS+1))'(NBANKS));
  assign rd_avail = (count != '0);
  assign rd_meta  = meta[rd_bank];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank <= '0;
      rd_bank <= '0;
      count   <= '0;
      for (int k = 0; k < NBANKS; k++) meta[k] <= '0;
    end else begin
      if (wr_commit && wr_space) begin
        meta[wr_bank] <= wr_meta;
        wr_bank       <= nxt(wr_bank);
      end
      if (rd_release && rd_avail) rd_bank <= nxt(rd_bank);
      count <= count + ($clog2(NBANKS+1))'(wr_commit && wr_space)
                     - ($clog2(NBANKS+1))'(rd_release && rd_avail);
    end
  end

  // handshake rules: never commit into a full channel, never release an empty one
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_commit |-> wr_space);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> rd_avail);

endmodule
