// nn_branch: one of the two identical sub-networks of the displaced-muon
// model, the one estimating pT or the one estimating d0.
//
// Three dense layers in series: N_IN -> N_H1 -> N_H2 -> 1 with ReLU after
// the two hidden layers and a linear output node. With the published sizes
// this is 29 -> 10 -> 8 -> 1 (19 nodes). The ReLU / linear activations are
// this design's choice. All weights and biases come in through coef_i.
//
// Timing: each dense layer takes two clocks, so y_o and valid_o follow
// x_i and valid_i by six clocks. A new input may enter every clock.
module nn_branch
  import dnn_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 valid_i,
  input  data_t [N_IN-1:0]     x_i,
  input  branch_coef_t         coef_i,
  output logic                 valid_o,
  output data_t                y_o
);

  logic             v1, v2;
  data_t [N_H1-1:0] h1;
  data_t [N_H2-1:0] h2;
  data_t [N_OUT-1:0] y;

  dense_layer #(
    .N_IN(N_IN), .N_OUT(N_H1), .RELU(1'b1),
    .DATA_W(DATA_W), .W_W(W_W), .W_FRAC(W_FRAC), .ACC_W(ACC_W)
  ) u_layer1 (
    .clk, .rst_n, .valid_i, .x_i(x_i),
    .w_i(coef_i.w1), .b_i(coef_i.b1),
    .valid_o(v1), .y_o(h1)
  );

  dense_layer #(
    .N_IN(N_H1), .N_OUT(N_H2), .RELU(1'b1),
    .DATA_W(DATA_W), .W_W(W_W), .W_FRAC(W_FRAC), .ACC_W(ACC_W)
  ) u_layer2 (
    .clk, .rst_n, .valid_i(v1), .x_i(h1),
    .w_i(coef_i.w2), .b_i(coef_i.b2),
    .valid_o(v2), .y_o(h2)
  );

  dense_layer #(
    .N_IN(N_H2), .N_OUT(N_OUT), .RELU(1'b0),
    .DATA_W(DATA_W), .W_W(W_W), .W_FRAC(W_FRAC), .ACC_W(ACC_W)
  ) u_layer3 (
    .clk, .rst_n, .valid_i(v2), .x_i(h2),
    .w_i(coef_i.w3), .b_i(coef_i.b3),
    .valid_o, .y_o(y)
  );

  assign y_o = y[0];

endmodule
