// output_conv: output side of the fixed-latency wrapper.
//
// Turns one network output (signed, FRAC fractional bits) into an unsigned
// OUT_W-bit word whose LSB is 2^-OUT_FRAC of the network's unit. The value
// is rounded to the nearest LSB (halves upwards). Negative estimates are
// reported as 0 with clip_lo_o, estimates beyond the word as all ones with
// clip_hi_o. The paper states that the wrapper converts the outputs; the
// word sizes, LSBs and rounding are this design's choice.
//
// Timing: one register stage, one value per clock. Reset clears valid_o.
module output_conv #(
  parameter int DATA_W   = 16,
  parameter int FRAC     = 8,
  parameter int OUT_W    = 8,
  parameter int OUT_FRAC = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  logic [DATA_W-1:0] y_i,
  output logic              valid_o,
  output logic [OUT_W-1:0]  q_o,
  output logic              clip_lo_o,
  output logic              clip_hi_o
);

  localparam int SH = FRAC - OUT_FRAC;  // bits dropped by the conversion
  localparam int WW = DATA_W + OUT_W + 2;
  localparam logic signed [WW-1:0] QMAX = WW'((64'sd1 <<< OUT_W) - 1);

  logic signed [WW-1:0] r;
  logic [OUT_W-1:0]     q_d;
  logic                 lo_d, hi_d;

  always_comb begin
    r = WW'($signed(y_i));
    if (SH > 0)      r = (r + (WW'(1) <<< (SH - 1))) >>> SH;
    else if (SH < 0) r = r <<< (-SH);
    lo_d = 1'b0;
    hi_d = 1'b0;
    if (r < 0) begin
      q_d  = '0;
      lo_d = 1'b1;
    end else if (r > QMAX) begin
      q_d  = '1;
      hi_d = 1'b1;
    end else begin
      q_d = OUT_W'(r);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
    q_o       <= q_d;
    clip_lo_o <= valid_i & lo_d;
    clip_hi_o <= valid_i & hi_d;
  end

endmodule
