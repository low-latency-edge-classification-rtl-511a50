// node_array: the node-feature memory ("node array") that every Edgeblock PE
// carries for each node group it reads, so that all PEs can look up sender and
// receiver features at once without sharing a memory port.
//
// The array holds the NODE_DIM features of every node of one node group, for
// each of the NBANKS graphs the channel in front of the PE can hold. Node v
// of the group was produced by node lane v mod NLANES, so the array is built
// from NLANES sub-memories, each written by its own lane at address
// v div NLANES; all lanes can write in the same clock. One read port takes a
// node index within the group and returns its features one clock later.
//
// Giving each PE its own copy follows the paper; the split into per-lane
// sub-memories is this design's way of accepting several writers at once.
module node_array
  import gnn_pkg::*;
#(
  parameter int unsigned NLANES = 2,
  parameter int unsigned LDEPTH = 69,
  parameter int unsigned NBANKS = 2,
  localparam int unsigned BW = (NBANKS > 1) ? $clog2(NBANKS) : 1
) (
  input  logic                      clk,
  input  logic [BW-1:0]             wbank,
  input  logic [NLANES-1:0]         we,
  input  laddr_t [NLANES-1:0]       waddr,
  input  node_vec_t [NLANES-1:0]    wdata,
  input  logic [BW-1:0]             rbank,
  input  nidx_t                     ridx,
  output node_vec_t                 rdata
);

  localparam int unsigned AW = (LDEPTH > 1) ? $clog2(LDEPTH) : 1;

  node_vec_t [NLANES-1:0] lane_q;
  logic [$clog2(NLANES+1)-1:0] sel_q;
  nidx_t lane_addr;
  logic [$clog2(NLANES+1)-1:0] lane_sel;

  assign lane_sel  = ($clog2(NLANES+1))'(ridx % nidx_t'(NLANES));
  assign lane_addr = ridx / nidx_t'(NLANES);

  for (genvar p = 0; p < NLANES; p++) begin : g_lane
    pipo_ram #(.NBANKS(NBANKS), .DEPTH(LDEPTH), .W($bits(node_vec_t))) u_mem (
      .clk,
      .we(we[p]), .wbank(wbank), .waddr(AW'(waddr[p])), .wdata(wdata[p]),
      .rbank(rbank), .raddr(AW'(lane_addr)), .rdata(lane_q[p]));
  end

  always_ff @(posedge clk) sel_q <= lane_sel;
  assign rdata = (int'(sel_q) < NLANES) ? lane_q[sel_q] : lane_q[0];

endmodule
