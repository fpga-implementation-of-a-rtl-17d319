// tb_pulse_pkg -- stimulus and reference model shared by the channel and
// full-design testbenches.
//
// Stimulus: a calorimeter-like pulse train under the harshest pile-up, an
// energy deposit in every bunch crossing. Each deposit adds a pulse of the
// shape SHAPE (seven samples, peak in the middle) to the following samples on
// top of a constant pedestal; the sum is clipped to the 12-bit ADC range.
//
// Reference: the same network evaluated in double-precision floating point
// from the real values of the fixed-point constants, with an exact tanh
// clamped to the table range [-1, 1.2]. The fixed-point pipeline must agree
// with it to within TOL_COUNTS ADC counts (table step and truncations).
package tb_pulse_pkg;
  import ann_pkg::*;

  localparam int  SHAPE_LEN  = 7;
  localparam real SHAPE [SHAPE_LEN] = '{0.02, 0.17, 0.56, 1.0, 0.56, 0.17, 0.02};
  localparam real PEDESTAL   = 50.0;
  localparam real TOL_COUNTS = 1.0;
  localparam real U_LO       = real'(U_MIN_Q) / 16384.0;
  localparam real U_HI       = real'(U_MAX_Q) / 16384.0;

  typedef struct {
    coef_t    gain1, ymin1, b1, lw2, b2, ymin2, gain2;
    weights_t iw1;
  } net_t;

  typedef struct {
    real u;   // hidden neuron input before clamping
    real y;   // amplitude in ADC counts
  } ref_t;

  function automatic net_t default_net();
    net_t n;
    n.gain1 = DEF_GAIN1; n.ymin1 = DEF_YMIN1; n.iw1 = DEF_IW1; n.b1 = DEF_B1;
    n.lw2 = DEF_LW2; n.b2 = DEF_B2; n.ymin2 = DEF_YMIN2; n.gain2 = DEF_GAIN2;
    return n;
  endfunction

  function automatic real q14(input coef_t c);
    return real'(c) / 16384.0;
  endfunction

  // window[0] oldest ... window[N_SAMPLES-1] newest
  function automatic ref_t ann_ref(input net_t n, input sample_t window [N_SAMPLES]);
    ref_t r;
    real  uc, a;
    r.u = q14(n.b1);
    for (int i = 0; i < N_SAMPLES; i++)
      r.u += q14(n.iw1[i]) * (real'(window[i]) * real'(n.gain1) / real'(longint'(1) << GAIN1_FRAC)
                             + q14(n.ymin1));
    uc  = (r.u < U_LO) ? U_LO : (r.u > U_HI) ? U_HI : r.u;
    a   = 2.0 / (1.0 + $exp(-2.0 * uc)) - 1.0;
    r.y = (q14(n.lw2) * a + q14(n.b2) - q14(n.ymin2)) * real'(n.gain2) / real'(1 << GAIN2_FRAC);
    return r;
  endfunction

  // Next ADC sample of a pulse train; hist holds the last SHAPE_LEN deposits,
  // hist[0] the newest, and the new deposit amp is pushed in first.
  function automatic sample_t next_sample(inout real hist [SHAPE_LEN], input real amp);
    real s;
    for (int k = SHAPE_LEN - 1; k > 0; k--) hist[k] = hist[k-1];
    hist[0] = amp;
    s = PEDESTAL;
    for (int k = 0; k < SHAPE_LEN; k++) s += hist[k] * SHAPE[k];
    if (s > 4095.0) s = 4095.0;
    if (s < 0.0)    s = 0.0;
    return sample_t'(int'(s));
  endfunction

  // Deposited energy of one bunch crossing: mostly small, sometimes large.
  function automatic real random_deposit();
    if ($urandom_range(0, 9) == 0) return real'($urandom_range(200, 3000));
    else                           return real'($urandom_range(1, 150));
  endfunction
endpackage
