// pi_controller: proportional-integral cavity field feedback controller (the
// block C of the block diagram), one independent loop each for I and Q.
//
// On each sample strobe, with e = r - y,
//   acc  <= clamp(acc + Ki*e)                  (integrator, KI_FRAC fraction bits)
//   u_fb <= sat(Kp*e >> KP_FRAC + acc >> KI_FRAC)
// Kp is Q5.12 and Ki is Q1.16 per sample. The integrator is clamped to the
// sample range (anti-windup) and u_fb saturates to 16 bits; int_sat and
// out_sat flag either event on the sample where it happens. While loop_en is
// low the integrator is held at zero and u_fb is zero, so the loop locks from
// a clean state when it is closed (at the start of the RF flat top).
// Latency: u_fb is registered, one sample strobe after r and y.
// The paper names the controller as a PI on I and Q; gains, formats,
// anti-windup and the loop_en behaviour are this design's choices.
module pi_controller
  import dobc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,        // sample strobe
  input  logic  loop_en,   // loop closed
  input  gain_t kp,
  input  gain_t ki,
  input  iq_t   r,         // set point
  input  iq_t   y,         // cavity field measurement (after the decoupler)
  output iq_t   u_fb,
  output logic  int_sat,
  output logic  out_sat
);

  localparam int unsigned E_W   = IQ_W + 1;
  localparam int unsigned ACC_W = IQ_W + KI_FRAC + 2;
  localparam int unsigned P_W   = E_W + GAIN_W;

  typedef logic signed [ACC_W-1:0] acc_t;

  localparam acc_t ACC_MAX = acc_t'(signed'(SAMPLE_MAX)) <<< KI_FRAC;
  localparam acc_t ACC_MIN = acc_t'(signed'(SAMPLE_MIN)) <<< KI_FRAC;

  acc_t acc_i, acc_q;

  typedef struct packed {
    acc_t acc;
    logic isat;
    logic signed [63:0] u;
  } ch_t;

  // One channel: error, integrator update and output sum.
  function automatic ch_t channel(input sample_t rr, input sample_t yy, input acc_t acc,
                                  input gain_t kpp, input gain_t kii);
    logic signed [E_W-1:0]   e;
    logic signed [P_W-1:0]   p;
    logic signed [ACC_W:0]   nxt;
    ch_t c;
    e   = E_W'(rr) - E_W'(yy);
    p   = P_W'(kpp) * P_W'(e);
    nxt = (ACC_W+1)'(acc) + (ACC_W+1)'(P_W'(kii) * P_W'(e));
    c.isat = 1'b0;
    if (nxt > (ACC_W+1)'(ACC_MAX)) begin
      c.acc  = ACC_MAX;
      c.isat = 1'b1;
    end else if (nxt < (ACC_W+1)'(ACC_MIN)) begin
      c.acc  = ACC_MIN;
      c.isat = 1'b1;
    end else begin
      c.acc = acc_t'(nxt);
    end
    c.u = 64'(p >>> KP_FRAC) + 64'(c.acc >>> KI_FRAC);
    return c;
  endfunction

  ch_t ci, cq;

  always_comb begin
    ci = channel(r.i, y.i, acc_i, kp, ki);
    cq = channel(r.q, y.q, acc_q, kp, ki);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_i   <= '0;
      acc_q   <= '0;
      u_fb    <= '0;
      int_sat <= 1'b0;
      out_sat <= 1'b0;
    end else if (en) begin
      if (!loop_en) begin
        acc_i   <= '0;
        acc_q   <= '0;
        u_fb    <= '0;
        int_sat <= 1'b0;
        out_sat <= 1'b0;
      end else begin
        acc_i   <= ci.acc;
        acc_q   <= cq.acc;
        u_fb.i  <= sat_sample(ci.u);
        u_fb.q  <= sat_sample(cq.u);
        int_sat <= ci.isat | cq.isat;
        out_sat <= is_sat(ci.u) | is_sat(cq.u);
      end
    end
  end

endmodule
