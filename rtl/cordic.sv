// cordic: iterative CORDIC in rotation mode, giving sin and cos of an angle.
//
// The double pendulum equations need the sine and cosine of several angle
// combinations; the paper names trigonometric operations as the reason for
// that generator's long latency but does not say how they are computed.
// This unit is this design's choice: a radix-2 CORDIC that resolves one
// bit of angle per clock.
//
// Format: angle, sin and cos are signed Q.DP_FRAC fixed-point numbers
// (prng_pkg).  angle must lie in [-pi, pi]; angles beyond +-pi/2 are first
// rotated by pi and the results negated.  The gain is pre-compensated by
// starting from x = 1/K.
//
// Timing: start (one-clock pulse, ignored while busy) latches the angle;
// done pulses ITER+1 clocks later with sin/cos valid, and they hold until
// the next start.
module cordic
  import prng_pkg::*;
#(
  parameter int unsigned ITER = DP_FRAC + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic signed [DP_W-1:0] angle,
  output logic                   busy,
  output logic                   done,
  output logic signed [DP_W-1:0] sin_o,
  output logic signed [DP_W-1:0] cos_o
);

  localparam int unsigned IW = $clog2(ITER + 1);

  logic signed [DP_W-1:0] x, y, z;
  logic                   neg;
  logic [IW-1:0]          i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      x     <= '0;
      y     <= '0;
      z     <= '0;
      neg   <= 1'b0;
      i     <= '0;
      sin_o <= '0;
      cos_o <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          i    <= '0;
          x    <= DP_CORDIC_K;
          y    <= '0;
          if (angle > DP_HALFPI) begin
            z   <= angle - DP_PI;
            neg <= 1'b1;
          end else if (angle < -DP_HALFPI) begin
            z   <= angle + DP_PI;
            neg <= 1'b1;
          end else begin
            z   <= angle;
            neg <= 1'b0;
          end
        end
      end else if (i == IW'(ITER)) begin
        busy  <= 1'b0;
        done  <= 1'b1;
        sin_o <= neg ? -y : y;
        cos_o <= neg ? -x : x;
      end else begin
        if (z >= 0) begin
          x <= x - (y >>> i);
          y <= y + (x >>> i);
          z <= z - cordic_atan(32'(i));
        end else begin
          x <= x + (y >>> i);
          y <= y - (x >>> i);
          z <= z + cordic_atan(32'(i));
        end
        i <= i + 1'b1;
      end
    end
  end

endmodule
