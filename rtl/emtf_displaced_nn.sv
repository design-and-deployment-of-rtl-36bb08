// emtf_displaced_nn: fixed-latency wrapper around the displaced-muon
// network, the top level of the design.
//
// A muon track is presented as 29 raw integer features with valid_i. The
// wrapper converts them to the network's fixed-point format, runs the
// stitched network (batch normalisation, then the pT and d0 branches), and
// converts the two estimates into unsigned output words: pT with a 0.5 GeV
// LSB and |d0| with a 0.5 cm LSB, 8 bits each (0 to 127.5), saturating. A delay line pads
// the 9-clock pipeline so that every result appears exactly LATENCY clocks
// after its track, whatever the data, as the trigger's fixed latency budget
// requires. The default of 10 clocks is the published 83 ns at a 120 MHz
// clock; the clock frequency, word formats and flag outputs are this
// design's choices. The trained coefficients are not built in: they enter
// through coef_i and must be held stable while tracks are processed.
//
// Interface: valid_i / raw_i in, valid_o / pt_o / d0_o / flags_o out, one
// track per clock, no back-pressure.
module emtf_displaced_nn
  import dnn_pkg::*;
#(
  parameter int LATENCY = NN_LATENCY
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            valid_i,
  input  raw_t [N_IN-1:0] raw_i,
  input  nn_coef_t        coef_i,
  output logic            valid_o,
  output logic [OUT_W-1:0] pt_o,
  output logic [OUT_W-1:0] d0_o,
  output nn_flags_t       flags_o
);

  // Clocks taken by the pipeline itself: input conversion, batch norm,
  // three dense layers of two clocks each, output conversion.
  localparam int PIPE = 1 + 1 + 3 * 2 + 1;
  localparam int PAD  = LATENCY - PIPE;

  initial assert (PAD >= 0) else $fatal(1, "LATENCY must be at least %0d", PIPE);

  // Input conversion
  logic             cv_valid, in_sat;
  data_t [N_IN-1:0] x;

  input_conv #(
    .N_IN(N_IN), .RAW_W(RAW_W), .RAW_FRAC(RAW_FRAC), .DATA_W(DATA_W), .FRAC(FRAC)
  ) u_in (
    .clk, .rst_n, .valid_i, .raw_i(raw_i),
    .valid_o(cv_valid), .x_o(x), .sat_o(in_sat)
  );

  // The saturation flag travels alongside the track through the network
  logic [PIPE-2:0] sat_pipe;
  always_ff @(posedge clk) sat_pipe <= {sat_pipe[PIPE-3:0], in_sat};

  // Network
  logic  nn_valid;
  data_t pt_y, d0_y;

  displaced_nn u_nn (
    .clk, .rst_n, .valid_i(cv_valid), .x_i(x), .coef_i,
    .valid_o(nn_valid), .pt_o(pt_y), .d0_o(d0_y)
  );

  // Output conversion
  logic             pt_valid, d0_valid;
  logic [OUT_W-1:0] pt_q, d0_q;
  nn_flags_t        fl;

  output_conv #(
    .DATA_W(DATA_W), .FRAC(FRAC), .OUT_W(OUT_W), .OUT_FRAC(PT_OUT_FRAC)
  ) u_pt_out (
    .clk, .rst_n, .valid_i(nn_valid), .y_i(pt_y),
    .valid_o(pt_valid), .q_o(pt_q), .clip_lo_o(fl.pt_lo), .clip_hi_o(fl.pt_hi)
  );

  output_conv #(
    .DATA_W(DATA_W), .FRAC(FRAC), .OUT_W(OUT_W), .OUT_FRAC(D0_OUT_FRAC)
  ) u_d0_out (
    .clk, .rst_n, .valid_i(nn_valid), .y_i(d0_y),
    .valid_o(d0_valid), .q_o(d0_q), .clip_lo_o(fl.d0_lo), .clip_hi_o(fl.d0_hi)
  );

  assign fl.in_sat = sat_pipe[PIPE-2] & pt_valid;

  // Padding to the fixed latency
  localparam int RW = 1 + 2 * OUT_W + $bits(nn_flags_t);
  logic [RW-1:0] res;
  assign res = {pt_valid, pt_q, d0_q, fl};

  logic [RW-1:0] res_out;
  if (PAD == 0) begin : g_nopad
    assign res_out = res;
  end else begin : g_pad
    logic [PAD-1:0][RW-1:0] dly;
    logic [PAD-1:0]         vdly;
    always_ff @(posedge clk) begin
      dly[0] <= res;
      for (int k = 1; k < PAD; k++) dly[k] <= dly[k-1];
      // valid bits are reset so that no stale result leaves after reset
      if (!rst_n) vdly <= '0;
      else begin
        vdly[0] <= pt_valid;
        for (int k = 1; k < PAD; k++) vdly[k] <= vdly[k-1];
      end
    end
    always_comb begin
      res_out = dly[PAD-1];
      res_out[RW-1] = vdly[PAD-1];
    end
  end

  assign {valid_o, pt_o, d0_o, flags_o} = res_out;

  assert property (@(posedge clk) disable iff (!rst_n) pt_valid == d0_valid)
    else $error("pT and d0 outputs out of step");

endmodule
