// dense_layer: one fully connected layer of an MLP, all multiplications in
// parallel (one multiplier per weight), followed by an optional ReLU and an
// output register.
//
// y[o] = act( sum_i w[o][i]*x[i] + b[o] ), in Q7.7 fixed point. Products are
// summed at full precision, then truncated toward minus infinity to 7
// fractional bits and saturated to 14 bits. The multiply-all-at-once
// structure gives one result per clock (initiation interval 1).
//
// Timing: x/in_valid sampled on a rising edge appear on y/out_valid one clock
// later. Weights are static inputs (held in a register file elsewhere).
module dense_layer
  import gnn_pkg::*;
#(
  parameter int unsigned NIN  = 4,
  parameter int unsigned NOUT = 4,
  parameter bit          RELU = 1'b1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  fx_t [NIN-1:0]              x,
  input  fx_t [NOUT-1:0][NIN-1:0]    w,
  input  fx_t [NOUT-1:0]             b,
  output logic                       out_valid,
  output fx_t [NOUT-1:0]             y
);

  fx_t [NOUT-1:0] y_d;

  always_comb begin
    for (int o = 0; o < NOUT; o++) begin
      logic signed [47:0] acc;
      acc = 48'(signed'(b[o])) <<< FX_FRAC;
      for (int i = 0; i < NIN; i++)
        acc += 48'(signed'(w[o][i])) * 48'(signed'(x[i]));
      y_d[o] = fx_sat(acc >>> FX_FRAC);
      if (RELU && y_d[o][FX_W-1]) y_d[o] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      y         <= y_d;
    end
  end

endmodule
