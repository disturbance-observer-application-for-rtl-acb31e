// tb_dobc_top: end-to-end closed-loop test of the controller at its default
// parameters, with the RF chain played by rf_plant_model (1 MHz sampling).
//
// Each RF pulse lasts 1000 samples (1000 us); the loop is closed for the
// pulse and the plant is emptied in the gap. The drift monitor is captured at
// the middle of the pulse. Pulses:
//   1  no drift, DOBC off     cavity reaches the set point, monitor reads 0
//   2  30 deg drift, DOBC off the PI output must turn by -30 deg to hold the
//                             field; the monitor reads 30 deg
//   3  30 deg drift, DOBC on  the PI output stays near 0 deg (the observer
//                             takes the drift), monitor 30 deg, and the
//                             field phase error in the lock transient is
//                             smaller than in pulse 2
//   4  -20 deg drift, DOBC on
//   5  39 deg drift, DOBC on  (the largest drift reported for a cold start)
//   6  amplifier gain halved, set point out of reach: drive and PI output
//      saturate and the integrator clamps
//   7  as 3 again after the overload: the loop recovers
// Every mechanism (DOBC on/off switch, loop enable, capture, PI output
// saturation, integrator clamp, drive saturation) is counted and a failure
// is counted for one that never happened.
module tb_dobc_top;
  import dobc_pkg::*;

  localparam int PULSE = 1000;
  localparam int GAP   = 400;
  localparam real PI = 3.14159265358979;

  logic clk = 1'b0, rst_n = 1'b0, sample_valid = 1'b0, capture = 1'b0;
  dobc_cfg_t cfg;
  iq_t r, y, y_ssa, u, u_fb, d_hat;
  phase_t theta_d_hat, theta_captured;
  logic capture_valid, pi_int_sat, pi_out_sat, drive_sat, dob_sat;
  logic plant_clr = 1'b1;
  real h_act = 1.0, drift = 0.0;

  int checks = 0, failures = 0;
  int n_dob_on = 0, n_dob_off = 0, n_loop_on = 0, n_cap = 0;
  int n_pi_osat = 0, n_pi_isat = 0, n_drive_sat = 0;

  dobc_top dut (.*);

  rf_plant_model plant (
    .clk, .en(sample_valid), .clr(plant_clr), .u(u), .h(h_act), .theta_d_deg(drift),
    .beam_i(0.0), .beam_q(0.0),
    .y_ssa(y_ssa), .y(y)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (20 * (PULSE + GAP)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real deg(sample_t qq, sample_t ii);
    return $atan2($itor(qq), $itor(ii)) * 180.0 / PI;
  endfunction
  function automatic real bam_deg(phase_t p);
    return $itor(p) * 360.0 / 65536.0;
  endfunction

  task automatic expect_near(string what, real got, real want, real tol);
    checks++;
    if (got > want + tol || got < want - tol) begin
      failures++;
      $display("FAIL %s: got %f, expected %f +/- %f", what, got, want, tol);
    end else begin
      $display("ok   %s: %f (expected %f)", what, got, want);
    end
  endtask

  real ph_err_sum, amp_end, ph_end, ufb_ph_end;

  // one RF pulse; returns the summed |phase error| over samples 50..400
  task automatic run_pulse(real drift_deg, bit dob_on, real gain);
    drift = drift_deg;
    h_act = gain;
    cfg.dob_en = dob_on;
    if (dob_on) n_dob_on++; else n_dob_off++;
    ph_err_sum = 0.0;
    @(negedge clk);
    plant_clr = 1'b0;
    cfg.loop_en = 1'b1;
    n_loop_on++;
    for (int n = 0; n < PULSE; n++) begin
      capture = (n == PULSE / 2);
      @(negedge clk);
      if (n >= 50 && n < 400) ph_err_sum += (deg(y.q, y.i) < 0.0) ? -deg(y.q, y.i) : deg(y.q, y.i);
      if (pi_out_sat) n_pi_osat++;
      if (pi_int_sat) n_pi_isat++;
      if (drive_sat) n_drive_sat++;
    end
    capture = 1'b0;
    amp_end = $sqrt($itor(y.i) * $itor(y.i) + $itor(y.q) * $itor(y.q));
    ph_end = deg(y.q, y.i);
    ufb_ph_end = deg(u_fb.q, u_fb.i);
    // gap: loop open, cavity empty
    cfg.loop_en = 1'b0;
    plant_clr = 1'b1;
    repeat (GAP) @(negedge clk);
    checks++;
    if (!capture_valid) begin failures++; $display("FAIL no capture"); end
    else n_cap++;
  endtask

  real err_off, err_on;

  initial begin
    cfg = '0;
    cfg.kp     = gain_t'(2 << KP_FRAC);            // Kp = 2
    cfg.ki     = gain_t'(3000);                     // Ki = 0.046 per sample
    cfg.k_qob  = K_QOB_2KHZ_1MSPS;
    cfg.k_ssa  = K_SSA_100KHZ_1MSPS;
    cfg.hinv_c = coef_t'($rtoi($cos(30.0 * PI / 180.0) * 16384.0 + 0.5));
    cfg.hinv_s = coef_t'($rtoi($sin(30.0 * PI / 180.0) * 16384.0 + 0.5));
    r.i = 16'sd20000;
    r.q = 16'sd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    sample_valid = 1'b1;
    repeat (10) @(negedge clk);

    run_pulse(0.0, 1'b0, 1.0);
    expect_near("p1 amplitude", amp_end, 20000.0, 100.0);
    expect_near("p1 phase", ph_end, 0.0, 0.3);
    expect_near("p1 monitor", bam_deg(theta_captured), 0.0, 1.0);

    run_pulse(30.0, 1'b0, 1.0);
    err_off = ph_err_sum;
    expect_near("p2 amplitude", amp_end, 20000.0, 100.0);
    expect_near("p2 phase", ph_end, 0.0, 0.3);
    expect_near("p2 PI output phase", ufb_ph_end, -30.0, 2.0);
    expect_near("p2 monitor", bam_deg(theta_captured), 30.0, 1.5);

    run_pulse(30.0, 1'b1, 1.0);
    err_on = ph_err_sum;
    expect_near("p3 amplitude", amp_end, 20000.0, 100.0);
    expect_near("p3 phase", ph_end, 0.0, 0.3);
    expect_near("p3 PI output phase", ufb_ph_end, 0.0, 2.0);
    expect_near("p3 monitor", bam_deg(theta_captured), 30.0, 1.5);
    checks++;
    $display("summed |phase error| 50..400 us: DOBC off %f deg, on %f deg", err_off, err_on);
    if (!(err_on < err_off)) begin failures++; $display("FAIL DOBC did not reduce the phase error"); end

    run_pulse(-20.0, 1'b1, 1.0);
    expect_near("p4 phase", ph_end, 0.0, 0.3);
    expect_near("p4 PI output phase", ufb_ph_end, 0.0, 2.0);
    expect_near("p4 monitor", bam_deg(theta_captured), -20.0, 1.5);

    run_pulse(39.0, 1'b1, 1.0);
    expect_near("p5 phase", ph_end, 0.0, 0.3);
    expect_near("p5 PI output phase", ufb_ph_end, 0.0, 2.0);
    expect_near("p5 monitor", bam_deg(theta_captured), 39.0, 1.5);

    r.i = 16'sd30000;
    run_pulse(10.0, 1'b0, 0.5);
    checks++;
    if (!(amp_end < 29000.0)) begin failures++; $display("FAIL overload pulse reached set point"); end

    r.i = 16'sd20000;
    run_pulse(30.0, 1'b1, 1.0);
    expect_near("p7 amplitude", amp_end, 20000.0, 100.0);
    expect_near("p7 phase", ph_end, 0.0, 0.3);

    $display("mechanisms: dob_on=%0d dob_off=%0d loop_on=%0d capture=%0d pi_out_sat=%0d int_clamp=%0d drive_sat=%0d",
             n_dob_on, n_dob_off, n_loop_on, n_cap, n_pi_osat, n_pi_isat, n_drive_sat);
    checks++;
    if (n_dob_on == 0 || n_dob_off == 0 || n_loop_on == 0 || n_cap == 0 ||
        n_pi_osat == 0 || n_pi_isat == 0 || n_drive_sat == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
