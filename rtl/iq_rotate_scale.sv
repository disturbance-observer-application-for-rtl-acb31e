// iq_rotate_scale: complex multiplication of an I/Q sample by a programmable
// coefficient c + j*s, i.e. a gain times a 2x2 rotation matrix
//   [y_i]   [c  -s] [x_i]
//   [y_q] = [s   c] [x_q]
// In the observer it implements the static part of the inverse nominal
// amplifier model, (1/h_SSA) * R(-theta_SSA): the caller loads
// c = cos(theta)/h and s = -sin(theta)/h. Coefficients are signed Q3.14, the
// products are rounded, shifted back to the sample format and saturated.
// The result is registered on the sample strobe (one sample of latency).
// Coefficient format, rounding and saturation are this design's choices.
module iq_rotate_scale
  import dobc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  coef_t c,
  input  coef_t s,
  input  iq_t   x,
  output iq_t   y,
  output logic  sat      // a channel saturated on the last update
);

  localparam int unsigned P_W = IQ_W + COEF_W + 1;
  typedef logic signed [P_W-1:0] prod_t;

  prod_t yi_w, yq_w;

  always_comb begin
    yi_w = prod_t'(c) * prod_t'(x.i) - prod_t'(s) * prod_t'(x.q);
    yq_w = prod_t'(s) * prod_t'(x.i) + prod_t'(c) * prod_t'(x.q);
    yi_w = (yi_w + prod_t'(1 <<< (ROT_FRAC - 1))) >>> ROT_FRAC;
    yq_w = (yq_w + prod_t'(1 <<< (ROT_FRAC - 1))) >>> ROT_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y   <= '0;
      sat <= 1'b0;
    end else if (clr) begin
      y   <= '0;
      sat <= 1'b0;
    end else if (en) begin
      y.i <= sat_sample(64'(yi_w));
      y.q <= sat_sample(64'(yq_w));
      sat <= is_sat(64'(yi_w)) | is_sat(64'(yq_w));
    end
  end

endmodule
