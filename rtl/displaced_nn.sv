// displaced_nn: the complete stitched network for displaced muons.
//
// The 29 converted track features pass through one batch-normalisation
// layer shared by both halves, then feed two sub-networks side by side:
// one regresses the transverse momentum pT, the other the transverse
// impact parameter d0. Trained as two separate models, they are run as one
// model; two independent branches are equivalent to a single network whose
// weight matrices are block diagonal. That structure is the published one.
//
// Timing: batch norm (1 clock) + branch (6 clocks) = 7 clocks from valid_i
// to valid_o, one track per clock.
module displaced_nn
  import dnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid_i,
  input  data_t [N_IN-1:0] x_i,
  input  nn_coef_t         coef_i,
  output logic             valid_o,
  output data_t            pt_o,
  output data_t            d0_o
);

  logic             bn_valid;
  data_t [N_IN-1:0] xn;
  logic             pt_valid, d0_valid;

  batch_norm #(
    .N_IN(N_IN), .DATA_W(DATA_W), .W_W(W_W), .W_FRAC(W_FRAC)
  ) u_bn (
    .clk, .rst_n, .valid_i, .x_i(x_i),
    .scale_i(coef_i.bn_scale), .bias_i(coef_i.bn_bias),
    .valid_o(bn_valid), .y_o(xn)
  );

  nn_branch u_pt (
    .clk, .rst_n, .valid_i(bn_valid), .x_i(xn), .coef_i(coef_i.pt),
    .valid_o(pt_valid), .y_o(pt_o)
  );

  nn_branch u_d0 (
    .clk, .rst_n, .valid_i(bn_valid), .x_i(xn), .coef_i(coef_i.d0),
    .valid_o(d0_valid), .y_o(d0_o)
  );

  // Both branches have the same latency
  assign valid_o = pt_valid;

  assert property (@(posedge clk) disable iff (!rst_n) pt_valid == d0_valid)
    else $error("pT and d0 branches out of step");

endmodule
