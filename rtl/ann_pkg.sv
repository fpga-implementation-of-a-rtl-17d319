// ann_pkg -- shared types, fixed-point formats and default network constants
// for the neural-network pulse-amplitude reconstruction pipeline.
//
// Every stage of the pipeline works on signed fixed-point words. Normalised
// quantities (normalised samples, the hidden neuron input, its activation and
// the network output) are data_t words with DATA_FRAC fraction bits, so 1.0 is
// 2**DATA_FRAC. Weights and biases are coef_t words. Raw ADC samples are
// unsigned sample_t words, and the reconstructed amplitude is an out_t word in
// ADC counts with OUT_FRAC fraction bits.
//
// The network shape follows the paper: 9 samples per window, one hidden layer
// with a single tan-sigmoid neuron, one linear output neuron, a 5,000-entry
// activation look-up table and 48 channels in parallel. The word widths, the
// binary-point positions, the saturation on overflow and the truncating
// rounding are this design's own choices; the paper only says the floating
// point model was converted to fixed point. The default constants below are
// placeholders that give a sensible amplitude estimate for a 12-bit sampled
// pulse. The trained constants of the paper are not published, so a user
// loads their own trained values through the module parameters.
package ann_pkg;

  // ---- network dimensions -------------------------------------------------
  localparam int N_SAMPLES  = 9;     // samples per reconstruction window
  localparam int N_CHANNELS = 48;    // channels reconstructed in parallel
  localparam int LUT_DEPTH  = 5000;  // entries of the activation table

  // ---- fixed-point formats ------------------------------------------------
  localparam int SAMPLE_W  = 12;     // ADC sample width (unsigned)
  localparam int DATA_W    = 18;     // normalised values, signed
  localparam int DATA_FRAC = 14;     // fraction bits of data_t
  localparam int COEF_W    = 18;     // weights, biases and gains, signed
  localparam int W_FRAC    = 14;     // fraction bits of layer weights
  localparam int OUT_W     = 20;     // reconstructed amplitude, signed
  localparam int OUT_FRAC  = 4;      // fraction bits of the amplitude

  localparam int LATENCY   = 5;      // clock cycles from window to amplitude

  typedef logic        [SAMPLE_W-1:0] sample_t;
  typedef logic signed [DATA_W-1:0]   data_t;
  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic signed [OUT_W-1:0]    out_t;
  typedef coef_t                      weights_t [N_SAMPLES];

  // ---- default network constants (placeholders, see header) --------------
  // Input normalisation xn = x * GAIN1 + YMIN1 maps [0, 4095] onto [-1, 1].
  localparam int    GAIN1_FRAC = 24;
  localparam coef_t DEF_GAIN1  = 18'sd8194;        // 2/4095 * 2**24
  localparam coef_t DEF_YMIN1  = -18'sd16384;      // -1.0
  // Hidden neuron: weights peaked on the centre sample, Q.W_FRAC.
  localparam weights_t DEF_IW1 = '{-18'sd819, -18'sd819, 18'sd0, 18'sd2458,
                                   18'sd8192, 18'sd2458, 18'sd0, -18'sd819,
                                   -18'sd819};
  localparam coef_t DEF_B1     = 18'sd0;
  // Output neuron a2 = LW2 * a1 + B2.
  localparam coef_t DEF_LW2    = 18'sd16384;       // 1.0
  localparam coef_t DEF_B2     = 18'sd0;
  // Output denormalisation y = (a2 - YMIN2) * GAIN2 maps [-1, 1] onto [0, 4095].
  localparam int    GAIN2_FRAC = 4;
  localparam coef_t DEF_YMIN2  = -18'sd16384;      // -1.0
  localparam coef_t DEF_GAIN2  = 18'sd32760;       // 2047.5 * 2**4

  // Activation table argument range [-1.0, 1.2] in Q.DATA_FRAC.
  localparam int U_MIN_Q = -16384;
  localparam int U_MAX_Q = 19661;

  // ---- helpers ------------------------------------------------------------
  // Saturate a wide intermediate result to a data_t / out_t word.
  function automatic data_t sat_data(input longint v);
    localparam longint HI = (longint'(1) <<< (DATA_W - 1)) - 1;
    localparam longint LO = -(longint'(1) <<< (DATA_W - 1));
    if (v > HI)      return data_t'(HI);
    else if (v < LO) return data_t'(LO);
    else             return data_t'(v);
  endfunction

  function automatic out_t sat_out(input longint v);
    localparam longint HI = (longint'(1) <<< (OUT_W - 1)) - 1;
    localparam longint LO = -(longint'(1) <<< (OUT_W - 1));
    if (v > HI)      return out_t'(HI);
    else if (v < LO) return out_t'(LO);
    else             return out_t'(v);
  endfunction

  // tanh of an argument given in Q.28, returned rounded to Q.DATA_FRAC.
  // g(u) = 2/(1+exp(-2u)) - 1 = (1-e)/(1+e) with e = exp(-2u). exp is formed
  // as exp(x/8)**8: a 10-term Taylor series for |x/8| <= 0.5 followed by three
  // squarings, all in Q.28, exact to far below one output LSB for |2u| <= 4.
  // Integer only and short, so it can fill a ROM at start-up.
  function automatic data_t tanh_q(input longint u_q28);
    localparam longint ONE = longint'(1) <<< 28;
    longint x, term, e, num, den, q;
    x    = (-2 * u_q28) >>> 3;
    term = ONE;
    e    = ONE;
    for (int k = 1; k <= 10; k++) begin
      term = ((term * x) >>> 28) / longint'(k);
      e    = e + term;
    end
    for (int k = 0; k < 3; k++) e = (e * e) >>> 28;
    num = (ONE - e) <<< DATA_FRAC;
    den = ONE + e;
    if (num >= 0) q = (num + den / 2) / den;
    else          q = -((-num + den / 2) / den);
    return sat_data(q);
  endfunction

endpackage
