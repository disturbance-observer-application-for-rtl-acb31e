// tb_beam_pulse: beam-loading workload. Runs the closed loop through RF pulses
// shaped like the isotope-production operation: the loop is closed at 0 us,
// the beam switches on at 375 us and stays on for 625 us (RF pulse 1000 us),
// then for 750 us (RF pulse 1125 us). The amplifier has a 30 degree phase
// drift. Each beam length is run without and with the disturbance-observer
// compensation. While the beam is on, the peak amplitude error (percent of
// set point) and peak phase error (degrees) are measured and checked against
// the +/-1 % and +/-1 degree limits for the compensated loop (beam-induced
// field drop of 3 % of the set point, an assumed value; there is no beam
// feedforward in this design, so the PI loop alone absorbs the beam step). The compensated loop
// must also do no worse than the uncompensated one in the lock transient
// (peak phase error from 200 us to beam on), and read the drift correctly.
module tb_beam_pulse;
  import dobc_pkg::*;

  localparam real PI = 3.14159265358979;
  localparam int  BEAM_ON = 375;
  localparam real SETPT = 20000.0;

  logic clk = 1'b0, rst_n = 1'b0, sample_valid = 1'b0, capture = 1'b0;
  dobc_cfg_t cfg;
  iq_t r, y, y_ssa, u, u_fb, d_hat;
  phase_t theta_d_hat, theta_captured;
  logic capture_valid, pi_int_sat, pi_out_sat, drive_sat, dob_sat;
  logic plant_clr = 1'b1;
  real beam_i = 0.0;

  int checks = 0, failures = 0;

  dobc_top dut (.*);

  rf_plant_model plant (
    .clk, .en(sample_valid), .clr(plant_clr), .u(u), .h(1.0), .theta_d_deg(30.0),
    .beam_i(beam_i), .beam_q(0.0), .y_ssa(y_ssa), .y(y)
  );

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real amp_pk, ph_pk, lock_ph_pk;

  task automatic run_pulse(int beam_len, bit dob_on);
    real a, p;
    cfg.dob_en = dob_on;
    amp_pk = 0.0; ph_pk = 0.0; lock_ph_pk = 0.0;
    @(negedge clk);
    plant_clr = 1'b0;
    cfg.loop_en = 1'b1;
    for (int n = 0; n < BEAM_ON + beam_len; n++) begin
      beam_i = (n >= BEAM_ON) ? 0.03 * SETPT : 0.0;
      capture = (n == (BEAM_ON + beam_len) / 2);
      @(negedge clk);
      a = 100.0 * ($sqrt($itor(y.i) * $itor(y.i) + $itor(y.q) * $itor(y.q)) - SETPT) / SETPT;
      p = $atan2($itor(y.q), $itor(y.i)) * 180.0 / PI;
      if (a < 0.0) a = -a;
      if (p < 0.0) p = -p;
      if (n >= BEAM_ON) begin
        if (a > amp_pk) amp_pk = a;
        if (p > ph_pk) ph_pk = p;
      end else if (n >= 200 && p > lock_ph_pk) lock_ph_pk = p;
    end
    beam_i = 0.0;
    capture = 1'b0;
    cfg.loop_en = 1'b0;
    plant_clr = 1'b1;
    repeat (300) @(negedge clk);
    $display("beam %0d us, DOBC %s: beam peak |amplitude error| %f %%, beam peak |phase error| %f deg, lock phase peak %f deg, drift read %f deg",
             beam_len, dob_on ? "on " : "off", amp_pk, ph_pk, lock_ph_pk, $itor(theta_captured) * 360.0 / 65536.0);
  endtask

  initial begin
    real lock_off;
    cfg = '0;
    cfg.kp     = gain_t'(2 << KP_FRAC);
    cfg.ki     = gain_t'(3000);
    cfg.k_qob  = K_QOB_2KHZ_1MSPS;
    cfg.k_ssa  = K_SSA_100KHZ_1MSPS;
    cfg.hinv_c = coef_t'($rtoi($cos(30.0 * PI / 180.0) * 16384.0 + 0.5));
    cfg.hinv_s = coef_t'($rtoi($sin(30.0 * PI / 180.0) * 16384.0 + 0.5));
    r.i = sample_t'($rtoi(SETPT));
    r.q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    sample_valid = 1'b1;
    foreach (beam_lens[k]) begin
      run_pulse(beam_lens[k], 1'b0);
      lock_off = lock_ph_pk;
      run_pulse(beam_lens[k], 1'b1);
      checks++;
      if (amp_pk > 1.0 || ph_pk > 1.0) begin
        failures++;
        $display("FAIL error limits exceeded with DOBC");
      end
      checks++;
      if (lock_ph_pk > lock_off + 0.01) begin
        failures++;
        $display("FAIL DOBC worse than PI alone in the lock transient");
      end
      checks++;
      if (!capture_valid || $itor(theta_captured) * 360.0 / 65536.0 < 28.5 ||
          $itor(theta_captured) * 360.0 / 65536.0 > 31.5) begin
        failures++;
        $display("FAIL drift reading");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int beam_lens [2] = '{625, 750};
endmodule
