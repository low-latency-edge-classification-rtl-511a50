// pipo_ram: banked memory of a graph-level channel, one bank per graph the
// channel can hold (see pipo_ctrl), DEPTH words per bank.
//
// One write port and one read port. The read is synchronous: rdata shows the
// word at (rbank, raddr) one clock after they are presented. A read and a
// write of the same word in one clock return the old word.
module pipo_ram #(
  parameter int unsigned NBANKS = 2,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned W      = 16,
  localparam int unsigned BW = (NBANKS > 1) ? $clog2(NBANKS) : 1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [BW-1:0] wbank,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [BW-1:0] rbank,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [NBANKS*DEPTH];

  always_ff @(posedge clk) begin
    // addresses beyond DEPTH are ignored on write and read as word 0
    if (we && int'(waddr) < DEPTH && int'(wbank) < NBANKS)
      mem[int'(wbank)*DEPTH + int'(waddr)] <= wdata;
    if (int'(raddr) < DEPTH && int'(rbank) < NBANKS)
      rdata <= mem[int'(rbank)*DEPTH + int'(raddr)];
    else
      rdata <= mem[0];
  end

endmodule
