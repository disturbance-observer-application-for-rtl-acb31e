// dobc_pkg: types, fixed-point formats and default coefficients shared by the
// disturbance-observer controller (DOBC) datapath.
//
// All baseband signals are I/Q pairs of signed 16-bit samples in full-scale
// units (Q1.15, +/-1.0 full scale). One new I/Q sample enters the datapath on
// every clock cycle in which the sample strobe is high; the filters are
// discrete first-order sections clocked by that strobe.
//
// The paper gives the structure of the observer (a two-pole Q-filter, the
// inverse nominal amplifier model as gain, rotation and low-pass) and the
// Q-filter cutoff of 2 kHz. It gives no sample rate, word widths or coefficient
// formats; those below are this design's own choices. The default filter
// coefficients assume a 1 MHz I/Q sample rate:
//   k = round((1 - exp(-2*pi*fc/Fs)) * 2^20)
//   fc = 2 kHz   (Q-filter cutoff, paper)      -> k = 13094
//   fc = 100 kHz (amplifier pole, assumed)     -> k = 489173
package dobc_pkg;

  localparam int unsigned IQ_W      = 16;  // baseband sample width
  localparam int unsigned LPF_K_W   = 20;  // low-pass coefficient, unsigned Q0.20
  localparam int unsigned COEF_W    = 18;  // rotation/gain coefficient, signed Q3.14
  localparam int unsigned ROT_FRAC  = 14;
  localparam int unsigned GAIN_W    = 18;  // PI gains, signed
  localparam int unsigned KP_FRAC   = 12;  // Kp is Q5.12
  localparam int unsigned KI_FRAC   = 16;  // Ki is Q1.16 (per sample)
  localparam int unsigned PHASE_W   = 16;  // binary angle: 2^16 LSB = 360 degrees

  typedef logic signed [IQ_W-1:0]    sample_t;
  typedef logic        [LPF_K_W-1:0] lpf_k_t;
  typedef logic signed [COEF_W-1:0]  coef_t;
  typedef logic signed [GAIN_W-1:0]  gain_t;
  typedef logic signed [PHASE_W-1:0] phase_t;

  typedef struct packed {
    sample_t i;
    sample_t q;
  } iq_t;

  // Run-time configuration, normally written by the control system.
  typedef struct packed {
    logic   loop_en;   // PI loop closed (integrator released)
    logic   dob_en;    // disturbance estimate subtracted from the drive
    gain_t  kp;        // proportional gain, Q5.12
    gain_t  ki;        // integral gain per sample, Q1.16
    lpf_k_t k_qob;     // Q-filter cutoff pole (2 kHz)
    lpf_k_t k_ssa;     // Q-filter first pole, cancels the amplifier pole
    coef_t  hinv_c;    // (1/h_SSA) * cos(theta_SSA), Q3.14
    coef_t  hinv_s;    // (1/h_SSA) * sin(theta_SSA), Q3.14
  } dobc_cfg_t;

  localparam lpf_k_t K_QOB_2KHZ_1MSPS  = lpf_k_t'(13094);
  localparam lpf_k_t K_SSA_100KHZ_1MSPS = lpf_k_t'(489173);
  localparam coef_t  COEF_ONE          = coef_t'(1 << ROT_FRAC);

  localparam sample_t SAMPLE_MAX = sample_t'((1 << (IQ_W - 1)) - 1);
  localparam sample_t SAMPLE_MIN = sample_t'(-(1 << (IQ_W - 1)));

  // Saturate a wide signed value to the sample range.
  function automatic sample_t sat_sample(input logic signed [63:0] x);
    if (x > 64'(signed'(SAMPLE_MAX)))      return SAMPLE_MAX;
    else if (x < 64'(signed'(SAMPLE_MIN))) return SAMPLE_MIN;
    else                                   return sample_t'(x);
  endfunction

  function automatic logic is_sat(input logic signed [63:0] x);
    return (x > 64'(signed'(SAMPLE_MAX))) || (x < 64'(signed'(SAMPLE_MIN)));
  endfunction

endpackage
