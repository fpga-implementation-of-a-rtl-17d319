// ann_reconstructor -- top level: neural-network pulse-amplitude
// reconstruction for N_CHANNELS = 48 detector channels in parallel, one
// ann_channel pipeline per channel and one activation table (activation_lut)
// with a read port per channel.
//
// All channels are sampled on the same bunch crossing, so they share one
// in_valid strobe and produce their amplitudes on the same clock; every
// channel runs the same trained network (the constants are common
// parameters) with its own shift register, arithmetic and activation table.
// With an amplitude per channel per accepted sample, the design keeps up with
// the 40 MHz bunch-crossing rate whenever the clock is at least 40 MHz.
//
// Interface: samples[c] is the ADC sample of channel c, amplitudes[c] its
// reconstructed amplitude (ADC counts, OUT_FRAC fraction bits).
// Timing: out_valid and amplitudes follow the in_valid that completed a window
// by LATENCY + 1 = 6 clocks (5 through the network plus the shift register).
// The 48-channel count is the paper's; the common strobe and shared constants
// are this design's choice.
module ann_reconstructor
  import ann_pkg::*;
#(
  parameter int    N_CH      = N_CHANNELS,
  parameter int    N_TAPS    = N_SAMPLES,
  parameter coef_t GAIN1     = DEF_GAIN1,
  parameter int    G1_FRAC   = GAIN1_FRAC,
  parameter coef_t YMIN1     = DEF_YMIN1,
  parameter coef_t IW1 [N_TAPS] = DEF_IW1,
  parameter coef_t B1        = DEF_B1,
  parameter int    DEPTH     = LUT_DEPTH,
  parameter int    U_MIN     = U_MIN_Q,
  parameter int    U_MAX     = U_MAX_Q,
  parameter coef_t LW2       = DEF_LW2,
  parameter coef_t B2        = DEF_B2,
  parameter coef_t YMIN2     = DEF_YMIN2,
  parameter coef_t GAIN2     = DEF_GAIN2,
  parameter int    G2_FRAC   = GAIN2_FRAC
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t samples    [N_CH],
  output logic    out_valid,
  output out_t    amplitudes [N_CH]
);

  logic  ch_valid [N_CH];
  logic  lut_req  [N_CH];
  data_t lut_u    [N_CH];
  data_t lut_a    [N_CH];
  logic  lut_a_valid;

  activation_lut #(.N_PORTS(N_CH), .DEPTH(DEPTH), .U_MIN(U_MIN), .U_MAX(U_MAX)) u_lut (
    .clk, .rst_n,
    .in_valid (lut_req[0]),
    .u        (lut_u),
    .out_valid(lut_a_valid),
    .a        (lut_a)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    ann_channel #(
      .N_TAPS(N_TAPS), .GAIN1(GAIN1), .G1_FRAC(G1_FRAC), .YMIN1(YMIN1),
      .IW1(IW1), .B1(B1),
      .LW2(LW2), .B2(B2), .YMIN2(YMIN2), .GAIN2(GAIN2), .G2_FRAC(G2_FRAC)
    ) u_ch (
      .clk, .rst_n, .in_valid,
      .sample_in (samples[c]),
      .out_valid (ch_valid[c]),
      .y         (amplitudes[c]),
      .lut_valid  (lut_req[c]),
      .lut_u      (lut_u[c]),
      .lut_a_valid(lut_a_valid),
      .lut_a      (lut_a[c])
    );
  end

  assign out_valid = ch_valid[0];

  // All channels share the strobe, so they must stay in lock-step.
  always_ff @(posedge clk) begin
    if (rst_n)
      for (int c = 1; c < N_CH; c++)
        assert (ch_valid[c] == ch_valid[0] && lut_req[c] == lut_req[0])
          else $error("ann_reconstructor: channel %0d out of step", c);
  end

endmodule
