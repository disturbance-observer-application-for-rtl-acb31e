// tb_pi_controller: self-checking test of the PI feedback controller.
// A reference model in 64-bit integer arithmetic tracks the integrator of each
// channel; random set points, measurements and gains are applied with a
// random sample strobe. Checked every strobe: u_fb (one-strobe latency), the
// integrator clamp flag and the output saturation flag. Also checked: the
// loop_en=0 state clears the integrator and zeroes the output, and strobe-free
// cycles hold the output.
module tb_pi_controller;
  import dobc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, loop_en = 1'b0;
  gain_t kp, ki;
  iq_t r, y, u_fb;
  logic int_sat, out_sat;
  int checks = 0, failures = 0;
  int n_isat = 0, n_osat = 0;

  pi_controller dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint acc_m [2];
  longint exp_u [2];
  bit     exp_isat, exp_osat;
  localparam longint AMAX = 64'sd32767 <<< KI_FRAC;
  localparam longint AMIN = -(64'sd32768 <<< KI_FRAC);

  function automatic longint satl(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  // reference model of one strobe
  task automatic model_step();
    longint e, p, a, uu;
    longint rr [2], yy [2];
    rr[0] = r.i; rr[1] = r.q; yy[0] = y.i; yy[1] = y.q;
    exp_isat = 0; exp_osat = 0;
    for (int c = 0; c < 2; c++) begin
      if (!loop_en) begin
        acc_m[c] = 0; exp_u[c] = 0;
      end else begin
        e = rr[c] - yy[c];
        p = (longint'(kp) * e) >>> KP_FRAC;
        a = acc_m[c] + longint'(ki) * e;
        if (a > AMAX) begin a = AMAX; exp_isat = 1; end
        if (a < AMIN) begin a = AMIN; exp_isat = 1; end
        acc_m[c] = a;
        uu = p + (a >>> KI_FRAC);
        if (uu != satl(uu)) exp_osat = 1;
        exp_u[c] = satl(uu);
      end
    end
  endtask

  task automatic check_out();
    checks++;
    if (longint'(u_fb.i) != exp_u[0] || longint'(u_fb.q) != exp_u[1] ||
        int_sat != exp_isat || out_sat != exp_osat) begin
      failures++;
      if (failures < 10)
        $display("mismatch: u=(%0d,%0d) exp=(%0d,%0d) isat=%0b/%0b osat=%0b/%0b",
                 u_fb.i, u_fb.q, exp_u[0], exp_u[1], int_sat, exp_isat, out_sat, exp_osat);
    end
  endtask

  initial begin
    kp = 0; ki = 0; r = '0; y = '0;
    acc_m[0] = 0; acc_m[1] = 0; exp_u[0] = 0; exp_u[1] = 0;
    exp_isat = 0; exp_osat = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      en      = ($urandom_range(0, 3) != 0);
      loop_en = (n % 1500) > 20;
      if (n % 500 == 0) begin
        kp = gain_t'($urandom_range(0, 3 << KP_FRAC));
        ki = gain_t'($urandom_range(0, (n < 3000) ? 4000 : 60000));
      end
      r.i = sample_t'($urandom_range(0, 65535));
      r.q = sample_t'($urandom_range(0, 65535));
      if (n % 1500 > 700) begin   // near-zero error: integrator walks slowly
        y.i = r.i - sample_t'($urandom_range(0, 40)) + 20;
        y.q = r.q - sample_t'($urandom_range(0, 40)) + 20;
      end else begin
        y.i = sample_t'($urandom_range(0, 65535));
        y.q = sample_t'($urandom_range(0, 65535));
      end
      if (en) model_step();
      @(posedge clk);
      #1;
      check_out();
      if (int_sat) n_isat++;
      if (out_sat) n_osat++;
    end
    checks++;
    if (n_isat == 0 || n_osat == 0) begin
      failures++;
      $display("saturation never exercised: isat=%0d osat=%0d", n_isat, n_osat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
