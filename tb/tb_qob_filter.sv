// tb_qob_filter: self-checking test of the two-pole Q-filter.
// Part 1 compares both channels, every strobe, with a bit-exact integer model
// of the two cascaded one-pole sections (random data, random coefficients,
// random strobe), which also checks the two-strobe latency.
// Part 2 loads the default coefficients (2 kHz and 100 kHz poles at 1 MHz
// sampling) and checks the response to a 2 kHz tone against the analog
// two-pole magnitude |Q_ob(j*2pi*2kHz)| = 0.7069, and unity gain at DC.
module tb_qob_filter;
  import dobc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clr = 1'b0;
  lpf_k_t k_ssa, k_qob;
  iq_t x, y;
  int checks = 0, failures = 0;

  qob_filter dut (.*);

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

  longint s1 [2], s2 [2];

  task automatic check(string what, longint ei, longint eq);
    checks++;
    if (longint'(y.i) != ei || longint'(y.q) != eq) begin
      failures++;
      if (failures < 10) $display("%s: y=(%0d,%0d) exp=(%0d,%0d)", what, y.i, y.q, ei, eq);
    end
  endtask

  real peak, ratio;
  localparam real PI = 3.14159265358979;

  initial begin
    x = '0; k_ssa = '0; k_qob = '0;
    s1 = '{0, 0}; s2 = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Part 1: bit-exact model
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      if (n % 400 == 0) begin
        k_ssa = lpf_k_t'($urandom_range(1, (1 << 20) - 1));
        k_qob = lpf_k_t'($urandom_range(1, (n < 2000) ? 200000 : 20000));
      end
      en  = ($urandom_range(0, 2) != 0);
      clr = (n == 3000);
      x.i = sample_t'($urandom_range(0, 65535));
      x.q = (n % 800 < 400) ? sample_t'($urandom_range(0, 65535)) : -x.i;
      if (clr) begin
        s1 = '{0, 0}; s2 = '{0, 0};
      end else if (en) begin
        s2[0] = lpf_step(s2[0], lpf_out(s1[0]), k_qob);
        s2[1] = lpf_step(s2[1], lpf_out(s1[1]), k_qob);
        s1[0] = lpf_step(s1[0], x.i, k_ssa);
        s1[1] = lpf_step(s1[1], x.q, k_ssa);
      end
      @(posedge clk);
      #1;
      check("exact", lpf_out(s2[0]), lpf_out(s2[1]));
    end
    // Part 2: frequency response with the default (paper) cutoff
    @(negedge clk);
    clr = 1'b1; en = 1'b1; k_ssa = K_SSA_100KHZ_1MSPS; k_qob = K_QOB_2KHZ_1MSPS;
    @(negedge clk);
    clr = 1'b0;
    x.i = 16'sd20000; x.q = -16'sd10000;
    repeat (6000) @(negedge clk);
    check("dc", 20000, -10000);
    peak = 0.0;
    for (int n = 0; n < 3000; n++) begin
      x.i = sample_t'($rtoi(20000.0 * $cos(2.0 * PI * 2000.0 * n / 1.0e6)));
      x.q = '0;
      @(negedge clk);
      if (n >= 2000 && $itor(y.i) > peak) peak = $itor(y.i);
    end
    ratio = peak / 20000.0;
    checks++;
    // analog target: 1/sqrt(2) * 1/sqrt(1 + (2/100)^2) = 0.7070; discrete
    // sections at 1 MHz sit within 1 percent of it
    if (ratio < 0.695 || ratio > 0.720) begin
      failures++;
      $display("2 kHz gain %f, expected 0.707", ratio);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
