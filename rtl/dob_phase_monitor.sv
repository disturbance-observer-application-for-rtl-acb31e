// dob_phase_monitor: estimate of the amplifier phase drift theta_d_hat taken
// from the disturbance observer, with a capture register for one reading per
// RF pulse.
//
// If the amplifier rotates its input by an extra angle theta_d, the observer
// branches satisfy Q_ob H_n^-1 y_SSA = Q_ob (u + d) ~ R(theta_d) Q_ob u, i.e.
// qy = qu + d_hat is the filtered drive turned by the drift. The monitor
// therefore reports
//   theta_d_hat = angle(qy) - angle(qu)          (modulo 360 degrees)
// with two CORDIC vectoring units (cordic_atan2) and a subtraction in
// binary-angle units (2^16 LSB = 360 degrees). phase is updated every sample
// and lags the inputs by STAGES+1 sample strobes; on a capture strobe (for
// example the middle of the RF pulse) the current phase is held in
// phase_captured and capture_valid is raised. The paper reports the drift
// observed through the observer at mid-pulse; the angle-difference formula
// and the arithmetic are this design's own.
module dob_phase_monitor
  import dobc_pkg::*;
#(
  parameter int unsigned STAGES = 14
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  logic   capture,          // capture strobe, sampled with en
  input  iq_t    qu,               // Q_ob u
  input  iq_t    qy,               // Q_ob H_n^-1 y_SSA
  output phase_t phase,            // theta_d_hat
  output phase_t phase_captured,
  output logic   capture_valid
);

  phase_t ang_u, ang_y;

  cordic_atan2 #(.STAGES(STAGES)) u_ang_u (.clk, .rst_n, .en, .x(qu), .angle(ang_u));
  cordic_atan2 #(.STAGES(STAGES)) u_ang_y (.clk, .rst_n, .en, .x(qy), .angle(ang_y));

  // capture strobe delayed to line up with the CORDIC latency
  logic [STAGES+1:0] cap_pipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase          <= '0;
      phase_captured <= '0;
      capture_valid  <= 1'b0;
      cap_pipe       <= '0;
    end else if (en) begin
      phase    <= ang_y - ang_u;
      cap_pipe <= {cap_pipe[STAGES:0], capture};
      if (cap_pipe[STAGES+1]) begin
        phase_captured <= phase;
        capture_valid  <= 1'b1;
      end
    end
  end

endmodule
