// batch_norm: inference-time batch normalisation of the input features.
//
// At inference a batch-normalisation layer is a fixed affine map per
// feature, y = x * scale + bias, where scale = gamma / sqrt(var + eps) and
// bias = beta - mean * scale are folded offline from the trained
// parameters. The network places this layer between the 29 inputs and the
// dense layers; the folding, the number formats and the rounding are this
// design's choices. x and bias use the data format (FRAC fractional bits),
// scale uses the weight format (W_FRAC fractional bits). The product is
// truncated to FRAC fractional bits, the bias added, and the sum saturated
// to DATA_W bits.
//
// Timing: one register stage, one track per clock. Reset clears valid_o.
module batch_norm #(
  parameter int N_IN   = 29,
  parameter int DATA_W = 16,
  parameter int W_W    = 16,
  parameter int W_FRAC = 10
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        valid_i,
  input  logic [N_IN-1:0][DATA_W-1:0] x_i,
  input  logic [N_IN-1:0][W_W-1:0]    scale_i,
  input  logic [N_IN-1:0][DATA_W-1:0] bias_i,
  output logic                        valid_o,
  output logic [N_IN-1:0][DATA_W-1:0] y_o
);

  localparam int PW = DATA_W + W_W + 1;
  localparam logic signed [PW-1:0] MAXV = PW'((64'sd1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(64'sd1 <<< (DATA_W - 1));

  logic [N_IN-1:0][DATA_W-1:0] y_d;

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      logic signed [PW-1:0] p;
      p = PW'($signed(x_i[i])) * PW'($signed(scale_i[i]));
      p = (p >>> W_FRAC) + PW'($signed(bias_i[i]));
      if (p > MAXV)      y_d[i] = DATA_W'(MAXV);
      else if (p < MINV) y_d[i] = DATA_W'(MINV);
      else               y_d[i] = DATA_W'(p);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    y_o <= y_d;
  end

endmodule
