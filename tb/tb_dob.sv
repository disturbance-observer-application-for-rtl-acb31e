// tb_dob: self-checking test of the disturbance observer.
// The testbench plays a nominal amplifier, y_SSA = h*R(theta)*(u + d) with
// h = 0.9 and theta = -50 degrees (DC operating point), and loads the
// observer with the matching inverse model. For a series of random drives u
// and disturbances d (additive ones, and ones produced by an extra amplifier
// phase rotation theta_d, d = (R(theta_d) - I) u) it checks after settling
// that d_hat matches d. On every strobe it also checks that d_hat is the
// saturated difference qy - qu of the two branch outputs one strobe earlier
// (the sign of the observer equation and the register stage).
module tb_dob;
  import dobc_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, clr = 1'b0;
  dobc_cfg_t cfg;
  iq_t u, y_ssa, d_hat, qu, qy;
  logic sat;
  int checks = 0, failures = 0;

  dob dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real PI = 3.14159265358979;
  localparam real H = 0.9;
  localparam real TH = -50.0 * PI / 180.0;

  function automatic longint satl(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  // exact per-strobe check of the output stage
  longint prev_di, prev_dq;
  bit     prev_ok = 0;
  always @(posedge clk) begin
    if (rst_n && en && !clr) begin
      #1;
      if (prev_ok) begin
        checks++;
        if (d_hat.i != prev_di || d_hat.q != prev_dq) begin
          failures++;
          if (failures < 10) $display("d_hat=(%0d,%0d) exp=(%0d,%0d)", d_hat.i, d_hat.q, prev_di, prev_dq);
        end
      end
    end
  end
  always @(negedge clk) begin
    prev_di = satl(longint'(qy.i) - longint'(qu.i));
    prev_dq = satl(longint'(qy.q) - longint'(qu.q));
    prev_ok = rst_n && en;
  end

  task automatic apply(real ui, real uq, real di, real dq);
    real vi, vq;
    u.i = sample_t'($rtoi(ui));
    u.q = sample_t'($rtoi(uq));
    vi = ui + di; vq = uq + dq;
    y_ssa.i = sample_t'($rtoi(H * ($cos(TH) * vi - $sin(TH) * vq)));
    y_ssa.q = sample_t'($rtoi(H * ($sin(TH) * vi + $cos(TH) * vq)));
    repeat (3000) @(negedge clk);
    checks++;
    if ($itor(d_hat.i) > di + 10.0 || $itor(d_hat.i) < di - 10.0 ||
        $itor(d_hat.q) > dq + 10.0 || $itor(d_hat.q) < dq - 10.0) begin
      failures++;
      $display("settled d_hat=(%0d,%0d) expected (%f,%f)", d_hat.i, d_hat.q, di, dq);
    end
  endtask

  initial begin
    real ui, uq, ph;
    cfg = '0;
    cfg.k_qob  = K_QOB_2KHZ_1MSPS;
    cfg.k_ssa  = K_SSA_100KHZ_1MSPS;
    cfg.hinv_c = coef_t'($rtoi($cos(TH) / H * 16384.0 + 0.5));
    cfg.hinv_s = coef_t'($rtoi($sin(TH) / H * 16384.0 - 0.5));
    u = '0; y_ssa = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    en = 1'b1;
    // additive disturbances
    for (int n = 0; n < 4; n++) begin
      ui = $itor($urandom_range(0, 30000)) - 15000.0;
      uq = $itor($urandom_range(0, 30000)) - 15000.0;
      apply(ui, uq, $itor($urandom_range(0, 8000)) - 4000.0, $itor($urandom_range(0, 8000)) - 4000.0);
    end
    // amplifier phase drift of 20 and -39 degrees seen as input disturbance
    foreach (ph_list[j]) begin
      ph = ph_list[j] * PI / 180.0;
      ui = 16000.0; uq = 3000.0;
      apply(ui, uq, ($cos(ph) - 1.0) * ui - $sin(ph) * uq, $sin(ph) * ui + ($cos(ph) - 1.0) * uq);
    end
    // clear, then random strobes
    @(negedge clk);
    clr = 1'b1;
    @(negedge clk);
    clr = 1'b0;
    checks++;
    if (d_hat != '0) begin failures++; $display("clr did not clear d_hat"); end
    for (int n = 0; n < 500; n++) begin
      en = ($urandom_range(0, 1) != 0);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ph_list [2] = '{20.0, -39.0};
endmodule
