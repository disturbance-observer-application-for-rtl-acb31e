// qob_hinv: the product Q_ob(s) * H_n^-1(s) of the disturbance observer,
// applied to the measured amplifier output y_SSA (upper branch of the observer
// in the block diagram).
//
// The nominal amplifier model is H_n(s) = h_SSA/(tau_SSA*s + 1) * R(theta_SSA).
// Its inverse is not realisable on its own, but the first pole of Q_ob cancels
// the zero (tau_SSA*s + 1), leaving
//   Q_ob(s) H_n^-1(s) = 1/(tau_q*s + 1) * (1/h_SSA) * R(-theta_SSA),
// a single 2 kHz low-pass followed by a gain and an inverse rotation. The
// low-pass is one iq_lpf1 section (coefficient k_qob, shared with qob_filter
// so both branches have the same bandwidth); the gain/rotation is one
// iq_rotate_scale loaded with c = cos(theta_SSA)/h_SSA and
// s = -sin(theta_SSA)/h_SSA. Latency: two sample strobes from x to y, the same
// as qob_filter, so the two branches stay aligned when they are subtracted.
// The cancellation follows the paper; the order (low-pass before rotation,
// which commute) and the formats are this design's choices.
module qob_hinv
  import dobc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   clr,
  input  lpf_k_t k_qob,    // Q-filter cutoff pole (2 kHz)
  input  coef_t  hinv_c,   // cos(theta_SSA)/h_SSA, Q3.14
  input  coef_t  hinv_s,   // sin(theta_SSA)/h_SSA, Q3.14
  input  iq_t    x,        // measured amplifier output I_SSA, Q_SSA
  output iq_t    y,
  output logic   sat
);

  iq_t   lp;
  coef_t neg_s;

  assign neg_s = -hinv_s;

  iq_lpf1 u_pole_q (
    .clk, .rst_n, .en, .clr, .k(k_qob), .x(x), .y(lp)
  );

  iq_rotate_scale u_inv_model (
    .clk, .rst_n, .en, .clr, .c(hinv_c), .s(neg_s), .x(lp), .y(y), .sat(sat)
  );

endmodule
