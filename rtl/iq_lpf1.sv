// iq_lpf1: first-order low-pass filter applied to both channels of an I/Q
// stream. It is the discrete form of 1/(tau*s + 1) used for every pole of the
// disturbance observer.
//
// Each channel keeps a state s with LPF_K_W fraction bits below the sample
// LSB and updates, on each sample strobe,
//   s <= s + k * (x - s)          (k = 1 - exp(-2*pi*fc/Fs), unsigned Q0.20)
// which is a backward-Euler/impulse-invariant one-pole section with unity DC
// gain. Because the state carries 20 fraction bits the filter has no dead
// band even for cutoffs three decades below the sample rate. Output y is the
// state rounded to the sample width; it is registered, so y follows x with one
// sample of delay. clr returns the state to zero. The section form and the
// word widths are this design's choice; the paper only asks for first-order
// low-pass poles.
module iq_lpf1
  import dobc_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,     // sample strobe
  input  logic   clr,    // synchronous clear of the state
  input  lpf_k_t k,      // pole coefficient, Q0.20
  input  iq_t    x,
  output iq_t    y
);

  localparam int unsigned ST_W = IQ_W + LPF_K_W + 1;   // state width, one guard bit

  typedef logic signed [ST_W-1:0] state_t;

  state_t s_i, s_q;

  function automatic state_t step(input state_t s, input sample_t xin, input lpf_k_t kk);
    logic signed [ST_W:0]        diff;
    logic signed [ST_W+LPF_K_W+1:0] prod;
    diff = (ST_W+1)'(signed'(xin)) <<< LPF_K_W;
    diff = diff - (ST_W+1)'(s);
    prod = (ST_W+LPF_K_W+2)'(diff) * (ST_W+LPF_K_W+2)'(signed'({1'b0, kk}));
    return s + state_t'(prod >>> LPF_K_W);
  endfunction

  function automatic sample_t rnd(input state_t s);
    state_t rs;
    rs = (s + state_t'(1 <<< (LPF_K_W - 1))) >>> LPF_K_W;
    return sample_t'(rs);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_i <= '0;
      s_q <= '0;
    end else if (clr) begin
      s_i <= '0;
      s_q <= '0;
    end else if (en) begin
      s_i <= step(s_i, x.i, k);
      s_q <= step(s_q, x.q, k);
    end
  end

  assign y.i = rnd(s_i);
  assign y.q = rnd(s_q);

endmodule
