// tb_qob_hinv: self-checking test of Q_ob*H_n^-1 (2 kHz low-pass followed by
// gain 1/h_SSA and rotation by -theta_SSA).
// Part 1 compares every strobe with a bit-exact integer model (random data,
// coefficients and strobe, including saturating coefficients), which also
// checks the two-strobe latency and the saturation flag.
// Part 2 drives the output of a nominal amplifier, h*R(theta)*v, with
// h = 0.8 and theta = 35 degrees, and checks that the block returns v: the
// inverse model undoes the amplifier's gain and rotation.
module tb_qob_hinv;
  import dobc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clr = 1'b0;
  lpf_k_t k_qob;
  coef_t hinv_c, hinv_s;
  iq_t x, y;
  logic sat;
  int checks = 0, failures = 0, n_sat = 0;

  qob_hinv dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint lpf_step(longint s, longint xin, longint k);
    longint d;
    d = (xin <<< 20) - s;
    return s + ((d * k) >>> 20);
  endfunction
  function automatic longint lpf_out(longint s);
    return (s + (64'sd1 <<< 19)) >>> 20;
  endfunction
  function automatic longint satl(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  longint s [2], ey [2];
  bit esat;

  task automatic check(string what, longint ei, longint eq, bit es, int tol);
    checks++;
    if (y.i > ei + tol || y.i < ei - tol || y.q > eq + tol || y.q < eq - tol || sat != es) begin
      failures++;
      if (failures < 10)
        $display("%s: y=(%0d,%0d) exp=(%0d,%0d) sat=%0b/%0b", what, y.i, y.q, ei, eq, sat, es);
    end
  endtask

  localparam real PI = 3.14159265358979;
  real h, th, vi, vq;

  initial begin
    x = '0; k_qob = '0; hinv_c = '0; hinv_s = '0;
    s = '{0, 0}; ey = '{0, 0}; esat = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      longint li, lq, c, sn, pi_, pq;
      @(negedge clk);
      if (n % 300 == 0) begin
        k_qob  = lpf_k_t'($urandom_range(1000, 900000));
        hinv_c = coef_t'($urandom_range(0, (1 << 18) - 1));
        hinv_s = coef_t'($urandom_range(0, (1 << 18) - 1));
        if (n % 600 == 0) begin   // small coefficients: no saturation
          hinv_c = hinv_c >>> 3;
          hinv_s = hinv_s >>> 3;
        end
      end
      en  = ($urandom_range(0, 2) != 0);
      clr = (n == 2500);
      x.i = sample_t'($urandom_range(0, 65535));
      x.q = sample_t'($urandom_range(0, 65535));
      if (clr) begin
        s = '{0, 0}; ey = '{0, 0}; esat = 0;
      end else if (en) begin
        li = lpf_out(s[0]); lq = lpf_out(s[1]);
        c = hinv_c; sn = -longint'(hinv_s);
        pi_ = (c * li - sn * lq + 8192) >>> 14;
        pq  = (sn * li + c * lq + 8192) >>> 14;
        ey[0] = satl(pi_); ey[1] = satl(pq);
        esat = (pi_ != ey[0]) || (pq != ey[1]);
        s[0] = lpf_step(s[0], x.i, k_qob);
        s[1] = lpf_step(s[1], x.q, k_qob);
      end
      @(posedge clk);
      #1;
      check("exact", ey[0], ey[1], esat, 0);
      if (sat) n_sat++;
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never seen"); end
    // Part 2: inverse of a nominal amplifier
    h = 0.8; th = 35.0 * PI / 180.0; vi = 12000.0; vq = -5000.0;
    @(negedge clk);
    clr = 1'b1; en = 1'b1; k_qob = K_QOB_2KHZ_1MSPS;
    hinv_c = coef_t'($rtoi($cos(th) / h * 16384.0 + 0.5));
    hinv_s = coef_t'($rtoi($sin(th) / h * 16384.0 + 0.5));
    x.i = sample_t'($rtoi(h * ($cos(th) * vi - $sin(th) * vq)));
    x.q = sample_t'($rtoi(h * ($sin(th) * vi + $cos(th) * vq)));
    @(negedge clk);
    clr = 1'b0;
    repeat (4000) @(negedge clk);
    check("inverse", 12000, -5000, 1'b0, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
