// mlp: the "multiplier engine" of a processing element, a three-layer
// perceptron NIN -> 8 -> 8 -> NOUT with ReLU after the two hidden layers and
// a linear output layer.
//
// All layers are fully parallel and registered, so the MLP accepts one input
// vector per clock and returns its result MLP_LAT = 3 clocks later. The
// weights come in as one flat vector, laid out layer by layer: layer-1
// weights w1[o][i] at index o*NIN+i, then the layer-1 biases, then layer 2
// (w2[o][i] at o*8+i, biases), then layer 3 likewise.
//
// The 3-layer shape and the hidden width of 8 follow the drawing of the edge
// PE; the activation functions are this design's choice.
module mlp
  import gnn_pkg::*;
#(
  parameter int unsigned NIN  = 10,
  parameter int unsigned NOUT = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  fx_t [NIN-1:0]                      x,
  input  fx_t [mlp_nparam(NIN, NOUT)-1:0]    wts,
  output logic                               out_valid,
  output fx_t [NOUT-1:0]                     y
);

  localparam int unsigned O_W1 = 0;
  localparam int unsigned O_B1 = O_W1 + NIN*HID;
  localparam int unsigned O_W2 = O_B1 + HID;
  localparam int unsigned O_B2 = O_W2 + HID*HID;
  localparam int unsigned O_W3 = O_B2 + HID;
  localparam int unsigned O_B3 = O_W3 + HID*NOUT;

  fx_t [HID-1:0][NIN-1:0]  w1;
  fx_t [HID-1:0]           b1;
  fx_t [HID-1:0][HID-1:0]  w2;
  fx_t [HID-1:0]           b2;
  fx_t [NOUT-1:0][HID-1:0] w3;
  fx_t [NOUT-1:0]          b3;

  always_comb begin
    for (int o = 0; o < HID; o++) begin
      for (int i = 0; i < NIN; i++) w1[o][i] = wts[O_W1 + o*NIN + i];
      for (int i = 0; i < HID; i++) w2[o][i] = wts[O_W2 + o*HID + i];
      b1[o] = wts[O_B1 + o];
      b2[o] = wts[O_B2 + o];
    end
    for (int o = 0; o < NOUT; o++) begin
      for (int i = 0; i < HID; i++) w3[o][i] = wts[O_W3 + o*HID + i];
      b3[o] = wts[O_B3 + o];
    end
  end

  logic          v1, v2;
  fx_t [HID-1:0] h1, h2;

  dense_layer #(.NIN(NIN), .NOUT(HID),  .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(in_valid), .x(x),  .w(w1), .b(b1), .out_valid(v1), .y(h1));
  dense_layer #(.NIN(HID), .NOUT(HID),  .RELU(1'b1)) u_l2 (
    .clk, .rst_n, .in_valid(v1),       .x(h1), .w(w2), .b(b2), .out_valid(v2), .y(h2));
  dense_layer #(.NIN(HID), .NOUT(NOUT), .RELU(1'b0)) u_l3 (
    .clk, .rst_n, .in_valid(v2),       .x(h2), .w(w3), .b(b3), .out_valid(out_valid), .y(y));

endmodule
