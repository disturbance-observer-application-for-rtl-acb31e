// tb_dob_phase_monitor: self-checking test of the phase-drift monitor.
// Random vector pairs (qu, qy) with random magnitudes and angles are fed one
// per strobe; the expected phase, atan2(qy) - atan2(qu) computed with real
// arithmetic and wrapped to +/-180 degrees, is queued and compared with the
// output STAGES+1 strobes later (tolerance 0.05 degrees). Capture strobes at
// random times are checked to hold the phase of the sample they were given
// with, and capture_valid to rise.
module tb_dob_phase_monitor;
  import dobc_pkg::*;

  localparam int unsigned STAGES = 14;   // the module default
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, capture = 1'b0;
  iq_t qu, qy;
  phase_t phase, phase_captured;
  logic capture_valid;
  int checks = 0, failures = 0, n_cap = 0;

  dob_phase_monitor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real PI = 3.14159265358979;
  real exp_q [$];
  bit  cap_q [$];
  real last_cap;

  function automatic real wrap(real d);
    while (d > 180.0) d -= 360.0;
    while (d <= -180.0) d += 360.0;
    return d;
  endfunction

  function automatic real to_deg(phase_t p);
    return $itor(p) * 360.0 / 65536.0;
  endfunction

  task automatic check_phase(real got, real want, string what);
    real err;
    checks++;
    err = wrap(got - want);
    if (err > 0.05 || err < -0.05) begin
      failures++;
      if (failures < 10) $display("%s: got %f deg, expected %f deg", what, got, want);
    end
  endtask

  initial begin
    real mu, my, au, ay;
    qu = '0; qy = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      en = (n < 2000) ? 1'b1 : ($urandom_range(0, 2) != 0);
      mu = 2000.0 + $itor($urandom_range(0, 28000));
      my = 2000.0 + $itor($urandom_range(0, 28000));
      au = ($itor($urandom_range(0, 35999)) / 100.0 - 180.0) * PI / 180.0;
      ay = (n % 2 == 0) ? au + ($itor($urandom_range(0, 8000)) / 100.0 - 40.0) * PI / 180.0
                        : ($itor($urandom_range(0, 35999)) / 100.0 - 180.0) * PI / 180.0;
      qu.i = sample_t'($rtoi(mu * $cos(au)));
      qu.q = sample_t'($rtoi(mu * $sin(au)));
      qy.i = sample_t'($rtoi(my * $cos(ay)));
      qy.q = sample_t'($rtoi(my * $sin(ay)));
      capture = ($urandom_range(0, 199) == 0);
      if (en) begin
        exp_q.push_back(wrap(($atan2($itor(qy.q), $itor(qy.i)) - $atan2($itor(qu.q), $itor(qu.i))) * 180.0 / PI));
        cap_q.push_back(capture);
      end
      @(posedge clk);
      #1;
      if (en) begin
        // the sample given STAGES+1 strobes ago is now at the output
        if (exp_q.size() > STAGES + 1) begin
          real want;
          bit c;
          want = exp_q.pop_front();
          c = cap_q.pop_front();
          check_phase(to_deg(phase), want, "phase");
          if (c) last_cap = want;
        end
      end
    end
    checks++;
    if (n_cap < 5) begin
      failures++;
      $display("only %0d captures seen", n_cap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // capture register: on the strobe after the captured sample reaches the
  // output, phase_captured must hold it
  phase_t prev_cap_reg;
  bit seen_valid = 0;
  always @(posedge clk) begin
    #2;
    if (rst_n && capture_valid && (phase_captured != prev_cap_reg || !seen_valid)) begin
      n_cap++;
      seen_valid = 1;
      check_phase(to_deg(phase_captured), last_cap, "capture");
    end
    prev_cap_reg = phase_captured;
  end
endmodule
