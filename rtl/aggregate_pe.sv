// aggregate_pe: one Aggregate processing element.
//
// It adds each updated edge feature vector e' into the running sum a_v of the
// edge's receiver node v, held in an aggregated-feature memory indexed by v.
// The sum is a read-modify-write: the stored sum is read in the clock the
// edge arrives and the new sum is written in the next clock. When two
// consecutive edges share a receiver, the second would read a stale sum; the
// PE therefore keeps the last written sum and its index in the Edge Reg and
// Index Reg, compares the incoming index with the Index Reg and, on a hit,
// adds to the Edge Reg instead of the memory output. This keeps the PE at one
// edge per clock for any order of receivers.
//
// Readout: rd_en with rd_addr returns, one clock later on rd_data, the sums of
// the NL nodes rd_addr*NL + p (p = 0..NL-1) and clears those entries to zero,
// so the memory is empty again for the next graph. The memory is split into
// NL sub-memories (node v in sub-memory v mod NL) so that the NL Nodeblock
// lanes of the receiver group can be fed together. After reset the PE clears
// its memory by itself (LDEPTH clocks) and then raises init_done.
//
// Accumulate and readout must not be requested in the same clock. Additions
// saturate at the Q7.7 range.
//
// The memory, Edge Reg, Index Reg, the comparator and the hit multiplexer are
// those of the paper's Aggregate PE drawing; the banking, the clear-on-read
// and the saturation are this design's choices.
module aggregate_pe
  import gnn_pkg::*;
#(
  parameter int unsigned NL     = 2,
  parameter int unsigned LDEPTH = 69
) (
  input  logic                   clk,
  input  logic                   rst_n,
  output logic                   init_done,
  // accumulate
  input  logic                   acc_valid,
  input  nidx_t                  acc_v,
  input  edge_vec_t              acc_e,
  // readout and clear
  input  logic                   rd_en,
  input  laddr_t                 rd_addr,
  output edge_vec_t [NL-1:0]     rd_data,
  // event counter for verification: forwarded (hit) additions
  output logic                   fwd_hit
);

  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1;

  // ---------------------------------------------------------- stage 0
  laddr_t        a0;
  logic [LW-1:0] b0;
  assign a0 = laddr_t'(acc_v / nidx_t'(NL));
  assign b0 = LW'(acc_v % nidx_t'(NL));

  // ---------------------------------------------------------- stage 1
  logic          v1;
  nidx_t         n1;
  laddr_t        a1;
  logic [LW-1:0] b1;
  edge_vec_t     e1;

  // Edge Reg / Index Reg
  edge_vec_t edge_reg;
  nidx_t     index_reg;
  logic      index_ok;

  // init sweep
  laddr_t init_addr;

  edge_vec_t [NL-1:0] mem_q;
  edge_vec_t          old_sum, new_sum;
  logic               hit;

  assign hit = index_ok && (index_reg == n1);
  assign old_sum = hit ? edge_reg : mem_q[b1];
  always_comb begin
    for (int k = 0; k < EDGE_DIM; k++) new_sum[k] = fx_add(old_sum[k], e1[k]);
  end
  assign fwd_hit = v1 && hit;

  for (genvar p = 0; p < NL; p++) begin : g_bank
    edge_vec_t mem [LDEPTH];
    logic      w_en;
    laddr_t    w_addr;
    edge_vec_t w_data;
    laddr_t    r_addr;
    always_comb begin
      w_en = 1'b0; w_addr = a1; w_data = new_sum;
      if (!init_done) begin
        w_en = 1'b1; w_addr = init_addr; w_data = '0;
      end else if (rd_en) begin
        w_en = 1'b1; w_addr = rd_addr; w_data = '0;
      end else if (v1 && b1 == LW'(p)) begin
        w_en = 1'b1;
      end
      r_addr = rd_en ? rd_addr : a0;
    end
    always_ff @(posedge clk) begin
      if (w_en && int'(w_addr) < LDEPTH) mem[w_addr] <= w_data;
      if (int'(r_addr) < LDEPTH) mem_q[p] <= mem[r_addr];
      else                       mem_q[p] <= '0;
    end
  end

  assign rd_data = mem_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done <= 1'b0;
      init_addr <= '0;
      v1 <= 1'b0; n1 <= '0; a1 <= '0; b1 <= '0; e1 <= '0;
      edge_reg <= '0; index_reg <= '0; index_ok <= 1'b0;
    end else begin
      if (!init_done) begin
        init_addr <= init_addr + 1'b1;
        if (int'(init_addr) == LDEPTH-1) init_done <= 1'b1;
      end
      v1 <= acc_valid && init_done;
      n1 <= acc_v; a1 <= a0; b1 <= b0; e1 <= acc_e;
      if (v1) begin
        edge_reg  <= new_sum;
        index_reg <= n1;
        index_ok  <= 1'b1;
      end
      if (rd_en) index_ok <= 1'b0;
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && (acc_valid || v1)));

endmodule
