// dobc_top: cavity field controller of the DTL tank-1 RF system, a PI
// feedback controller with a disturbance-observer controller (DOBC) working in
// parallel with it to cancel the slow phase drift of the solid-state driver
// amplifier (SSPA).
//
// Signal flow, per I/Q sample (sample_valid strobe):
//   u_fb  = PI(r - y)                       pi_controller
//   u     = sat(u_fb - d_hat)               drive to the amplifier (d_hat only
//                                           when cfg.dob_en)
//   d_hat = Q_ob H_n^-1 y_SSA - Q_ob u      dob
//   theta_d_hat = angle(Q_ob H_n^-1 y_SSA) - angle(Q_ob u)   dob_phase_monitor
// y is the cavity field after the decoupling post-compensator W and y_ssa is
// the measured amplifier output; both come from outside this block, as do the
// analog front ends. The observer always runs, so the drift can be monitored
// with the compensation switched off; cfg.dob_en only decides whether d_hat is
// subtracted from the drive. While cfg.loop_en is low the drive is zero and
// the PI integrator is cleared.
// Latency: u_fb one strobe after r/y; u one strobe after u_fb/d_hat; d_hat
// three strobes after u/y_ssa; theta_d_hat CORDIC_STAGES+3 strobes after
// u/y_ssa. The structure and the signs are those of the paper's block diagram
// and observer equation; the fixed-point formats, the latencies, the
// saturation and the enable behaviour are this design's choices.
module dobc_top
  import dobc_pkg::*;
#(
  parameter int unsigned CORDIC_STAGES = 14
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      sample_valid,
  input  dobc_cfg_t cfg,
  input  iq_t       r,               // cavity field set point
  input  iq_t       y,               // cavity field feedback (after W)
  input  iq_t       y_ssa,           // measured amplifier output I_SSA, Q_SSA
  input  logic      capture,         // phase-drift capture strobe (mid pulse)
  output iq_t       u,               // drive to the amplifier chain
  output iq_t       u_fb,            // PI controller output
  output iq_t       d_hat,           // disturbance estimate
  output phase_t    theta_d_hat,     // estimated amplifier phase drift
  output phase_t    theta_captured,
  output logic      capture_valid,
  output logic      pi_int_sat,
  output logic      pi_out_sat,
  output logic      drive_sat,
  output logic      dob_sat
);

  iq_t qu, qy;
  logic signed [IQ_W:0] ui_w, uq_w;

  pi_controller u_pi (
    .clk, .rst_n, .en(sample_valid), .loop_en(cfg.loop_en),
    .kp(cfg.kp), .ki(cfg.ki), .r(r), .y(y),
    .u_fb(u_fb), .int_sat(pi_int_sat), .out_sat(pi_out_sat)
  );

  // DOBC injection: u = u_FB - d_hat
  always_comb begin
    ui_w = (IQ_W+1)'(u_fb.i);
    uq_w = (IQ_W+1)'(u_fb.q);
    if (cfg.dob_en) begin
      ui_w = ui_w - (IQ_W+1)'(d_hat.i);
      uq_w = uq_w - (IQ_W+1)'(d_hat.q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u         <= '0;
      drive_sat <= 1'b0;
    end else if (sample_valid) begin
      if (!cfg.loop_en) begin
        u         <= '0;
        drive_sat <= 1'b0;
      end else begin
        u.i       <= sat_sample(64'(ui_w));
        u.q       <= sat_sample(64'(uq_w));
        drive_sat <= is_sat(64'(ui_w)) | is_sat(64'(uq_w));
      end
    end
  end

  dob u_dob (
    .clk, .rst_n, .en(sample_valid), .clr(1'b0), .cfg(cfg),
    .u(u), .y_ssa(y_ssa), .d_hat(d_hat), .qu(qu), .qy(qy), .sat(dob_sat)
  );

  dob_phase_monitor #(.STAGES(CORDIC_STAGES)) u_mon (
    .clk, .rst_n, .en(sample_valid), .capture(capture), .qu(qu), .qy(qy),
    .phase(theta_d_hat), .phase_captured(theta_captured), .capture_valid(capture_valid)
  );

endmodule
