// dob: disturbance observer for the solid-state amplifier (SSPA).
//
// The amplifier is modelled as y_SSA = H_SSA(s) (u + d): its slow phase drift
// appears as an input disturbance d on I and Q. The observer forms
//   d_hat = Q_ob H_n^-1 y_SSA - Q_ob u
// (qob_hinv on the measured amplifier output minus qob_filter on the drive)
// and so estimates d low-pass filtered by Q_ob. Both branches have two samples
// of latency; the difference is saturated and registered, so d_hat appears
// three sample strobes after the u and y_SSA samples it is computed from.
// The filtered branch outputs are also brought out for the phase monitor.
// Structure and signs follow the paper's observer equation; the latency
// alignment, saturation and widths are this design's choices.
module dob
  import dobc_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,        // sample strobe
  input  logic      clr,
  input  dobc_cfg_t cfg,
  input  iq_t       u,         // drive sent to the amplifier
  input  iq_t       y_ssa,     // measured amplifier output
  output iq_t       d_hat,     // disturbance estimate
  output iq_t       qu,        // Q_ob u
  output iq_t       qy,        // Q_ob H_n^-1 y_SSA
  output logic      sat        // estimate or model branch saturated
);

  logic sat_model;
  logic signed [IQ_W:0] di_w, dq_w;

  qob_filter u_qob (
    .clk, .rst_n, .en, .clr,
    .k_ssa(cfg.k_ssa), .k_qob(cfg.k_qob), .x(u), .y(qu)
  );

  qob_hinv u_qob_hinv (
    .clk, .rst_n, .en, .clr,
    .k_qob(cfg.k_qob), .hinv_c(cfg.hinv_c), .hinv_s(cfg.hinv_s),
    .x(y_ssa), .y(qy), .sat(sat_model)
  );

  assign di_w = (IQ_W+1)'(qy.i) - (IQ_W+1)'(qu.i);
  assign dq_w = (IQ_W+1)'(qy.q) - (IQ_W+1)'(qu.q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_hat <= '0;
      sat   <= 1'b0;
    end else if (clr) begin
      d_hat <= '0;
      sat   <= 1'b0;
    end else if (en) begin
      d_hat.i <= sat_sample(64'(di_w));
      d_hat.q <= sat_sample(64'(dq_w));
      sat     <= sat_model | is_sat(64'(di_w)) | is_sat(64'(dq_w));
    end
  end

endmodule
