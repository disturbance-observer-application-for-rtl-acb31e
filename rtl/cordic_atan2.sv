// cordic_atan2: pipelined CORDIC in vectoring mode returning the angle of an
// I/Q sample as a 16-bit binary angle (2^16 LSB = 360 degrees, so the result
// wraps naturally and differences of angles are taken modulo 360 degrees).
//
// A pre-rotation by 180 degrees moves the vector into the right half plane;
// then STAGES micro-rotations by +/-atan(2^-i) drive the imaginary part to
// zero while the rotation angles are accumulated. Each stage is a register
// advanced by the sample strobe, so the angle appears STAGES+1 strobes after
// the sample. Internal words carry two growth bits and two fraction bits.
// Residual error is below 0.02 degrees for inputs above a few hundred LSB.
module cordic_atan2
  import dobc_pkg::*;
#(
  parameter int unsigned STAGES = 14   // 1..16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   en,
  input  iq_t    x,
  output phase_t angle
);

  localparam int unsigned W = IQ_W + 4;
  typedef logic signed [W-1:0] word_t;

  // atan(2^-i) in binary-angle units: round(atan(2^-i) / (2*pi) * 65536)
  localparam phase_t ATAN_LUT [16] = '{
    16'sd8192, 16'sd4836, 16'sd2555, 16'sd1297, 16'sd651, 16'sd326, 16'sd163, 16'sd81,
    16'sd41,   16'sd20,   16'sd10,   16'sd5,    16'sd3,   16'sd1,   16'sd1,   16'sd0
  };

  word_t  xs [STAGES+1];
  word_t  ys [STAGES+1];
  phase_t zs [STAGES+1];

  // stage 0: pre-rotation into the right half plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xs[0] <= '0;
      ys[0] <= '0;
      zs[0] <= '0;
    end else if (en) begin
      if (x.i < 0) begin
        xs[0] <= -(word_t'(x.i) <<< 2);
        ys[0] <= -(word_t'(x.q) <<< 2);
        zs[0] <= phase_t'(16'h8000);
      end else begin
        xs[0] <= word_t'(x.i) <<< 2;
        ys[0] <= word_t'(x.q) <<< 2;
        zs[0] <= '0;
      end
    end
  end

  for (genvar g = 0; g < STAGES; g++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        xs[g+1] <= '0;
        ys[g+1] <= '0;
        zs[g+1] <= '0;
      end else if (en) begin
        if (ys[g] >= 0) begin
          xs[g+1] <= xs[g] + (ys[g] >>> g);
          ys[g+1] <= ys[g] - (xs[g] >>> g);
          zs[g+1] <= zs[g] + ATAN_LUT[g];
        end else begin
          xs[g+1] <= xs[g] - (ys[g] >>> g);
          ys[g+1] <= ys[g] + (xs[g] >>> g);
          zs[g+1] <= zs[g] - ATAN_LUT[g];
        end
      end
    end
  end

  assign angle = zs[STAGES];

endmodule
