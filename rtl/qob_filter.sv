// qob_filter: the Q-filter Q_ob(s) of the disturbance observer, applied to the
// amplifier drive u (lower branch of the observer in the block diagram).
//
// The paper designs Q_ob(s) as a two-pole low-pass: the first pole cancels the
// zero of the inverse nominal amplifier model H_n^-1(s) (the amplifier's own
// high-frequency pole, 1/(tau_SSA*s + 1)), the second sets the observer
// bandwidth, equal to the 2 kHz bandwidth of the nominal cavity. Here
//   Q_ob(s) = 1 / ((tau_SSA*s + 1) * (tau_q*s + 1))
// is built as two cascaded first-order sections (iq_lpf1): k_ssa for the
// amplifier pole, then k_qob for the 2 kHz pole. Unity DC gain.
// Latency: two sample strobes from x to y. The cascade order and the
// discretisation are this design's choices; the two poles follow the paper.
module qob_filter
  import dobc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   clr,
  input  lpf_k_t k_ssa,   // first pole: amplifier time constant tau_SSA
  input  lpf_k_t k_qob,   // second pole: Q-filter cutoff (2 kHz)
  input  iq_t    x,
  output iq_t    y
);

  iq_t mid;

  iq_lpf1 u_pole_ssa (
    .clk, .rst_n, .en, .clr, .k(k_ssa), .x(x),   .y(mid)
  );

  iq_lpf1 u_pole_q (
    .clk, .rst_n, .en, .clr, .k(k_qob), .x(mid), .y(y)
  );

endmodule
