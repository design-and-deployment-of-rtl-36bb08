// dense_layer: one fully connected layer of the network, fully parallel.
//
// For every output node j it computes
//   y_j = act( sum_i x_i * w_ji + b_j )
// with one multiplier per weight, so a new input vector can be accepted
// every clock. act is ReLU when RELU = 1 and the identity otherwise.
// Formats: x, b and y use the data format (FRAC fractional bits), w the
// weight format (W_FRAC fractional bits). Products carry FRAC + W_FRAC
// fractional bits and are summed, together with the bias shifted into the
// same format, in an ACC_W-bit accumulator that wraps on overflow. The sum
// is truncated back to FRAC fractional bits and saturated to DATA_W bits.
// The layer structure is the published one; the formats, the wrapping
// accumulator, the rounding and the choice of ReLU are this design's.
//
// Timing: two register stages. Clock 1 registers all products, clock 2
// registers the activated sums, so y_o and valid_o follow x_i and valid_i
// by two clocks. Reset clears the valid pipeline only.
// With RELU = 1 the sign bit of every output is constant 0, so synthesis
// reports those bits as idle; that is the activation, not a fault.
module dense_layer #(
  parameter int N_IN   = 29,
  parameter int N_OUT  = 10,
  parameter bit RELU   = 1'b1,
  parameter int DATA_W = 16,
  parameter int W_W    = 16,
  parameter int W_FRAC = 10,
  parameter int ACC_W  = 32
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  valid_i,
  input  logic [N_IN-1:0][DATA_W-1:0]           x_i,
  input  logic [N_OUT-1:0][N_IN-1:0][W_W-1:0]   w_i,
  input  logic [N_OUT-1:0][DATA_W-1:0]          b_i,
  output logic                                  valid_o,
  output logic [N_OUT-1:0][DATA_W-1:0]          y_o
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((64'sd1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(64'sd1 <<< (DATA_W - 1));

  // Stage 1: products
  logic [N_OUT-1:0][N_IN-1:0][ACC_W-1:0] prod_q;
  logic [N_OUT-1:0][DATA_W-1:0]          bias_q;
  logic                                  valid_q;

  always_ff @(posedge clk) begin
    for (int j = 0; j < N_OUT; j++) begin
      for (int i = 0; i < N_IN; i++) begin
        prod_q[j][i] <= ACC_W'($signed(x_i[i])) * ACC_W'($signed(w_i[j][i]));
      end
    end
    bias_q <= b_i;
    if (!rst_n) valid_q <= 1'b0;
    else        valid_q <= valid_i;
  end

  // Stage 2: accumulate, add bias, requantise, activate
  logic [N_OUT-1:0][DATA_W-1:0] y_d;

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      logic signed [ACC_W-1:0] acc;
      acc = ACC_W'($signed(bias_q[j])) <<< W_FRAC;
      for (int i = 0; i < N_IN; i++) acc = acc + $signed(prod_q[j][i]);
      acc = acc >>> W_FRAC;
      if (acc > MAXV)      y_d[j] = DATA_W'(MAXV);
      else if (acc < MINV) y_d[j] = DATA_W'(MINV);
      else                 y_d[j] = DATA_W'(acc);
      if (RELU && y_d[j][DATA_W-1]) y_d[j] = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_q;
    y_o <= y_d;
  end

endmodule
