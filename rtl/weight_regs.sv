// weight_regs: register file holding the weights and biases of one MLP.
//
// The weights are written one word per clock through a simple write port
// (we, addr, data) before graphs are processed, and are presented in parallel
// on wts, in the layout the mlp module expects. All words reset to zero.
// Writes to an address at or above N are ignored. Loading weights at run time
// is this design's choice: the accelerator needs trained weights, and how
// they get into the device is not part of the architecture itself.
module weight_regs
  import gnn_pkg::*;
#(
  parameter int unsigned N = 196
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [9:0]          addr,
  input  fx_t                 data,
  output fx_t [N-1:0]         wts
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wts <= '0;
    else if (we && addr < 10'(N)) wts[addr] <= data;
  end

endmodule
