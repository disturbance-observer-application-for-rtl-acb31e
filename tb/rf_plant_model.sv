// rf_plant_model: behavioural model of the RF chain around the controller,
// for simulation only (not synthesizable: real arithmetic).
//
// Per sample strobe it models, in normalised baseband I/Q units:
//   solid-state driver:  first-order pole (ssa_pole_hz) on the drive, then
//                        gain h * R(theta_ssa + theta_d); theta_d is the slow
//                        phase drift the controller has to fight
//   cavity (with the tetrode and RF paths lumped in): first-order pole at the
//                        cavity half bandwidth (cav_pole_hz), unity gain, no
//                        detuning
//   beam loading:        the beam pulls the cavity field towards
//                        -(beam_i, beam_q) (steady-state field drop, given in
//                        set-point coordinates) with the cavity time constant
//   decoupler W:         the inverse nominal loop rotation R(-theta_ssa), so
//                        the controller sees the cavity field in set-point
//                        coordinates
// Outputs are quantised to 16-bit samples: y_ssa is the amplifier output as
// measured at its directional coupler, y the cavity field after W.
module rf_plant_model
  import dobc_pkg::*;
#(
  parameter real FS_HZ        = 1.0e6,
  parameter real SSA_POLE_HZ  = 100.0e3,
  parameter real CAV_POLE_HZ  = 2013.0,
  parameter real THETA_SSA_DEG = 30.0
) (
  input  logic clk,
  input  logic en,
  input  logic clr,         // RF off between pulses: empty the cavity
  input  iq_t  u,
  input  real  h,           // actual amplifier gain
  input  real  theta_d_deg, // actual amplifier phase drift
  input  real  beam_i,      // beam-induced field drop, set-point coordinates
  input  real  beam_q,
  output iq_t  y_ssa,
  output iq_t  y
);

  localparam real PI = 3.14159265358979;
  localparam real A_SSA = 1.0 - $exp(-2.0 * PI * SSA_POLE_HZ / FS_HZ);
  localparam real A_CAV = 1.0 - $exp(-2.0 * PI * CAV_POLE_HZ / FS_HZ);
  localparam real TH0 = THETA_SSA_DEG * PI / 180.0;

  real si = 0.0, sq = 0.0;     // amplifier pole state
  real oi = 0.0, oq = 0.0;     // amplifier output
  real ci = 0.0, cq = 0.0;     // cavity field

  function automatic sample_t q16(real v);
    if (v > 32767.0) return 16'sd32767;
    if (v < -32768.0) return -16'sd32768;
    return sample_t'($rtoi(v));
  endfunction

  always @(posedge clk) begin
    real th;
    if (clr) begin
      si = 0.0; sq = 0.0; oi = 0.0; oq = 0.0; ci = 0.0; cq = 0.0;
    end else if (en) begin
      ci = ci + A_CAV * (oi - ($cos(TH0) * beam_i - $sin(TH0) * beam_q) - ci);
      cq = cq + A_CAV * (oq - ($sin(TH0) * beam_i + $cos(TH0) * beam_q) - cq);
      si = si + A_SSA * ($itor(u.i) - si);
      sq = sq + A_SSA * ($itor(u.q) - sq);
      th = TH0 + theta_d_deg * PI / 180.0;
      oi = h * ($cos(th) * si - $sin(th) * sq);
      oq = h * ($sin(th) * si + $cos(th) * sq);
    end
    y_ssa.i <= q16(oi);
    y_ssa.q <= q16(oq);
    y.i     <= q16($cos(TH0) * ci + $sin(TH0) * cq);
    y.q     <= q16(-$sin(TH0) * ci + $cos(TH0) * cq);
  end

endmodule
