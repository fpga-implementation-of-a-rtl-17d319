// ann_channel -- neural-network amplitude reconstruction for one detector
// channel: a 9-sample shift register followed by the five pipeline stages of
// the network.
//
//   sample -> sample_shift_reg -> input_normalizer -> hidden_layer
//          -> [activation table] -> output_layer -> output_denormalizer -> y
//
// The activation table (activation_lut) sits outside the channel so that one
// table description can serve many channels: the channel sends the hidden
// neuron input out on lut_valid/lut_u and takes the activation back on
// lut_a_valid/lut_a, which the table returns one clock later.
//
// Each accepted sample completes a new 9-sample window, and every window gives
// one reconstructed amplitude, so the channel reconstructs once per bunch
// crossing with no dead time and can accept a sample on every clock. The
// latency is fixed: the amplitude of a window appears LATENCY = 5 clocks after
// the window leaves the shift register (6 clocks after its newest sample was
// presented on sample_in), matching the 5-cycle latency the paper reports.
// The paper does not say how the five cycles are split; here each operation
// of its block diagram (normalise, hidden sum, activation table, output sum,
// denormalise) is one register stage.
//
// Interface: in_valid/sample_in one sample per bunch crossing; out_valid/y one
// amplitude per window (ADC counts, OUT_FRAC fraction bits). The network
// constants are parameters; their defaults are placeholders (ann_pkg).
module ann_channel
  import ann_pkg::*;
#(
  parameter int    N_TAPS    = N_SAMPLES,
  parameter coef_t GAIN1     = DEF_GAIN1,
  parameter int    G1_FRAC   = GAIN1_FRAC,
  parameter coef_t YMIN1     = DEF_YMIN1,
  parameter coef_t IW1 [N_TAPS] = DEF_IW1,
  parameter coef_t B1        = DEF_B1,
  parameter coef_t LW2       = DEF_LW2,
  parameter coef_t B2        = DEF_B2,
  parameter coef_t YMIN2     = DEF_YMIN2,
  parameter coef_t GAIN2     = DEF_GAIN2,
  parameter int    G2_FRAC   = GAIN2_FRAC
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t sample_in,
  output logic    out_valid,
  output out_t    y,
  // port to the activation table
  output logic    lut_valid,
  output data_t   lut_u,
  input  logic    lut_a_valid,
  input  data_t   lut_a
);

  sample_t window [N_TAPS];
  data_t   xn [N_TAPS];
  data_t   u1, a1, a2;
  logic    win_valid, xn_valid, u1_valid, a1_valid, a2_valid;

  sample_shift_reg #(.N_TAPS(N_TAPS)) u_shift (
    .clk, .rst_n, .in_valid, .sample_in,
    .out_valid(win_valid), .window
  );

  input_normalizer #(.N_INPUTS(N_TAPS), .GAIN1(GAIN1), .G1_FRAC(G1_FRAC), .YMIN1(YMIN1)) u_norm (
    .clk, .rst_n, .in_valid(win_valid), .x(window),
    .out_valid(xn_valid), .xn
  );

  hidden_layer #(.N_INPUTS(N_TAPS), .IW1(IW1), .B1(B1)) u_hidden (
    .clk, .rst_n, .in_valid(xn_valid), .xn,
    .out_valid(u1_valid), .u1
  );

  // stage 3: the activation table, outside the channel
  assign lut_valid = u1_valid;
  assign lut_u     = u1;
  assign a1_valid  = lut_a_valid;
  assign a1        = lut_a;

  output_layer #(.LW2(LW2), .B2(B2)) u_out (
    .clk, .rst_n, .in_valid(a1_valid), .a1,
    .out_valid(a2_valid), .a2
  );

  output_denormalizer #(.YMIN2(YMIN2), .GAIN2(GAIN2), .G2_FRAC(G2_FRAC)) u_denorm (
    .clk, .rst_n, .in_valid(a2_valid), .a2,
    .out_valid, .y
  );

  // The latency is deterministic: a window leaving the shift register must
  // produce an amplitude exactly LATENCY clocks later, and never otherwise.
  logic [LATENCY-1:0] valid_pipe;

  always_ff @(posedge clk) begin
    if (!rst_n) valid_pipe <= '0;
    else        valid_pipe <= {valid_pipe[LATENCY-2:0], win_valid};
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (out_valid == valid_pipe[LATENCY-1])
      else $error("ann_channel: amplitude out of step with its window");
  end

endmodule
