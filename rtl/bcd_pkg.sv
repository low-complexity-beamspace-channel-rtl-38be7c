// bcd_pkg: word formats, algorithm constants and lookup-table generators shared by the
// beamspace channel denoiser.
//
// All datapath values are unsigned or two's-complement fixed point. Antenna-domain samples are
// 16 bits with 8 fractional bits, beamspace samples 10 bits with 8 fractional bits, squared
// magnitudes, D0 and the channel power 16 bits with 8 fractional bits and the SDNR 24 bits with
// 8 fractional bits; these follow the published word lengths. The remaining widths (threshold,
// LUT precisions, internal FFT word) are this design's own choice.
//
// Tables (twiddles, 1/m, ln m, piecewise-linear ln coefficients, 1/alpha) are computed at
// elaboration by the constant functions below, so no data file is needed and every table
// follows the array size parameter M.
package bcd_pkg;

  // ---------------------------------------------------------------- word formats
  localparam int FRAC      = 8;   // fractional bits of every datapath word
  localparam int ANT_W     = 16;  // antenna-domain sample (Q8.8)
  localparam int BS_W      = 10;  // beamspace sample (Q2.8)
  localparam int DN_W      = 12;  // denoised beamspace sample, after 1/alpha (Q4.8)
  localparam int SQ_W      = 16;  // |h'|^2, D0, P (Q8.8)
  localparam int SDNR_W    = 24;  // SDNR (Q16.8)
  localparam int ETA_W     = 24;  // threshold eta (Q16.8)
  localparam int LUT_F     = 16;  // fractional bits of LUT constants
  localparam int TW_F      = 14;  // fractional bits of FFT twiddles

  // ---------------------------------------------------------------- algorithm constants
  // c = 2 and c' = 4 for the noise-set thresholds, C = 4 for the decision cost; all powers of
  // two so they are shifts.
  localparam int LOG2_C_SET  = 1;
  localparam int LOG2_CP_SET = 2;
  localparam int LOG2_COST   = 2;
  localparam int N_ITER      = 3;  // truncated-mean refinement iterations T

  localparam real LN2 = 0.6931471805599453;

  // kappa(k) = (1 - e^-k (1 + k)) / (1 - e^-k): mean of an Exp(1) variable truncated at k.
  function automatic real kappa(real k);
    return (1.0 - $exp(-k) * (1.0 + k)) / (1.0 - $exp(-k));
  endfunction

  // Round a non-negative real to an unsigned fixed-point integer with f fractional bits.
  function automatic longint unsigned to_fix(real v, int f);
    return longint'($rtoi(v * (2.0 ** f) + 0.5));
  endfunction

  // Round a signed real to a fixed-point integer with f fractional bits.
  function automatic longint to_sfix(real v, int f);
    real s;
    s = v * (2.0 ** f);
    return (s >= 0.0) ? longint'($rtoi(s + 0.5)) : -longint'($rtoi(-s + 0.5));
  endfunction

  localparam longint unsigned INV_LN2_Q   = to_fix(1.0 / LN2, LUT_F);
  localparam longint unsigned INV_KC_Q    = to_fix(1.0 / kappa(2.0 ** LOG2_C_SET), LUT_F);
  localparam longint unsigned INV_KCP_Q   = to_fix(1.0 / kappa(2.0 ** LOG2_CP_SET), LUT_F);
  localparam longint          LN2_Q       = to_sfix(LN2, LUT_F);

  // 1/m with LUT_F fractional bits (m = 0 maps to 0).
  function automatic longint unsigned recip_q(int m);
    return (m == 0) ? 0 : to_fix(1.0 / real'(m), LUT_F);
  endfunction

  // ln m with LUT_F fractional bits (m = 0 maps to 0; never used).
  function automatic longint ln_q(int m);
    return (m <= 0) ? 0 : to_sfix($ln(real'(m)), LUT_F);
  endfunction

  // Piecewise-linear ln on the mantissa x in [1, 2): segment s covers
  // [1 + s/2^SEG_B, 1 + (s+1)/2^SEG_B) and uses the chord ln x ~ k1 * x + k0.
  localparam int SEG_B = 3;
  function automatic longint pwl_k1_q(int s);
    real x0, x1;
    x0 = 1.0 + real'(s) / real'(1 << SEG_B);
    x1 = 1.0 + real'(s + 1) / real'(1 << SEG_B);
    return to_sfix(($ln(x1) - $ln(x0)) / (x1 - x0), LUT_F);
  endfunction
  function automatic longint pwl_k0_q(int s);
    real x0, x1, k1;
    x0 = 1.0 + real'(s) / real'(1 << SEG_B);
    x1 = 1.0 + real'(s + 1) / real'(1 << SEG_B);
    k1 = ($ln(x1) - $ln(x0)) / (x1 - x0);
    return to_sfix($ln(x0) - k1 * x0, LUT_F);
  endfunction

  // 1/alpha for a b-bit ADC under the additive quantization noise model, alpha = 1 - rho(b)
  // with the distortion factors rho(b) of the optimal non-uniform quantizer for a Gaussian
  // input; b > 5 uses rho ~ (pi*sqrt(3)/2) 2^(-2b).
  function automatic longint unsigned inv_alpha_q(int b);
    real rho;
    case (b)
      1: rho = 0.3634;
      2: rho = 0.1175;
      3: rho = 0.03454;
      4: rho = 0.009497;
      5: rho = 0.002499;
      default: rho = (b <= 0) ? 0.3634 : 2.7207 * (2.0 ** (-2 * b));
    endcase
    return to_fix(1.0 / (1.0 - rho), LUT_F);
  endfunction

  // FFT twiddle exp(-j 2 pi k / m) with TW_F fractional bits.
  function automatic logic signed [15:0] tw_cos(int k, int m);
    return 16'(to_sfix($cos(2.0 * 3.14159265358979323846 * real'(k) / real'(m)), TW_F));
  endfunction
  function automatic logic signed [15:0] tw_sin(int k, int m);
    return 16'(to_sfix($sin(2.0 * 3.14159265358979323846 * real'(k) / real'(m)), TW_F));
  endfunction

endpackage
