// input_conv: input side of the fixed-latency wrapper around the network.
//
// Each of the N_IN raw track features arrives as a signed integer of RAW_W
// bits with RAW_FRAC fractional bits (0 by default: plain integers). The
// block re-aligns it to FRAC fractional bits and saturates it to the
// DATA_W-bit data format used inside the network. If any feature had to be
// saturated, sat_o is raised for that track. The paper states that the
// wrapper converts inputs; how it does so is this design's own choice.
//
// Timing: one register stage. valid_o and x_o follow valid_i and raw_i by
// one clock; a new track may enter every clock. Reset clears valid_o only.
module input_conv #(
  parameter int N_IN     = 29,
  parameter int RAW_W    = 13,
  parameter int RAW_FRAC = 0,
  parameter int DATA_W   = 16,
  parameter int FRAC     = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                valid_i,
  input  logic [N_IN-1:0][RAW_W-1:0]          raw_i,
  output logic                                valid_o,
  output logic [N_IN-1:0][DATA_W-1:0]         x_o,
  output logic                                sat_o
);

  // Wide enough to hold any raw value after the shift, and the limits
  localparam int SHIFT = FRAC - RAW_FRAC;
  localparam int LEFT  = RAW_W + (SHIFT > 0 ? SHIFT : 0);
  localparam int WIDE  = (LEFT > DATA_W ? LEFT : DATA_W) + 1;
  localparam logic signed [WIDE-1:0] MAXV = WIDE'((64'sd1 <<< (DATA_W - 1)) - 1);
  localparam logic signed [WIDE-1:0] MINV = -WIDE'(64'sd1 <<< (DATA_W - 1));

  logic [N_IN-1:0][DATA_W-1:0] x_d;
  logic [N_IN-1:0]             sat_d;

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      logic signed [WIDE-1:0] v;
      v = WIDE'($signed(raw_i[i]));
      if (SHIFT >= 0) v = v <<< SHIFT;
      else            v = v >>> (-SHIFT);
      sat_d[i] = 1'b0;
      if (v > MAXV) begin
        x_d[i]   = DATA_W'(MAXV);
        sat_d[i] = 1'b1;
      end else if (v < MINV) begin
        x_d[i]   = DATA_W'(MINV);
        sat_d[i] = 1'b1;
      end else begin
        x_d[i] = DATA_W'(v);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    x_o   <= x_d;
    sat_o <= valid_i & (|sat_d);
  end

endmodule
