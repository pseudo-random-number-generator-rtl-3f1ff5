// prng_pkg: types and constants shared by the random number generator blocks.
//
// The three generator models (multi-LFSR, logistic map, double pendulum) and
// the mixed mode are selected with gen_sel_e.  Fixed-point constants used by
// the double pendulum solver are kept here so that the CORDIC unit, the
// solver and the testbenches agree on one number format: signed two's
// complement with DP_FRAC fractional bits (Q11.20 in a 32-bit word).
package prng_pkg;

  // Output sample width of every generator as seen by the top level.
  localparam int unsigned RND_W = 16;

  // Generator model selected for the serial output.
  typedef enum logic [1:0] {
    GEN_LFSR     = 2'd0,  // multi-LFSR, lowest latency
    GEN_LOGISTIC = 2'd1,  // logistic map followed by CLT shaping
    GEN_PENDULUM = 2'd2,  // double pendulum solver
    GEN_MIXED    = 2'd3   // XOR of the latest sample of all three
  } gen_sel_e;

  // Fixed-point format of the double pendulum datapath.
  localparam int unsigned DP_W    = 32;
  localparam int unsigned DP_FRAC = 20;

  // pi, pi/2 and 2*pi in Q.DP_FRAC (rounded).
  localparam logic signed [DP_W-1:0] DP_PI     = 32'sd3294199;
  localparam logic signed [DP_W-1:0] DP_HALFPI = 32'sd1647099;
  localparam logic signed [DP_W-1:0] DP_TWOPI  = 32'sd6588397;
  // Gravitational acceleration 9.81 m/s^2 in Q.DP_FRAC.
  localparam logic signed [DP_W-1:0] DP_G      = 32'sd10286531;
  // CORDIC gain compensation 1/K = 0.6072529 in Q.DP_FRAC.
  localparam logic signed [DP_W-1:0] DP_CORDIC_K = 32'sd636751;

  // atan(2^-i) in Q.DP_FRAC, i = 0 .. 20.
  function automatic logic signed [DP_W-1:0] cordic_atan(input int unsigned i);
    case (i)
      0:  return 32'sd823550;
      1:  return 32'sd486170;
      2:  return 32'sd256879;
      3:  return 32'sd130396;
      4:  return 32'sd65451;
      5:  return 32'sd32757;
      6:  return 32'sd16383;
      7:  return 32'sd8192;
      8:  return 32'sd4096;
      9:  return 32'sd2048;
      10: return 32'sd1024;
      11: return 32'sd512;
      12: return 32'sd256;
      13: return 32'sd128;
      14: return 32'sd64;
      15: return 32'sd32;
      16: return 32'sd16;
      17: return 32'sd8;
      18: return 32'sd4;
      19: return 32'sd2;
      20: return 32'sd1;
      default: return 32'sd0;
    endcase
  endfunction

  // Double pendulum seed: starting angles, masses and rod lengths, all
  // signed Q.DP_FRAC.  The paper uses exactly these initial conditions as
  // the seed of its double pendulum generator.
  typedef struct packed {
    logic signed [DP_W-1:0] theta1;  // rad, 0 = hanging straight down
    logic signed [DP_W-1:0] theta2;  // rad
    logic signed [DP_W-1:0] m1;      // kg, must be positive
    logic signed [DP_W-1:0] m2;      // kg, must be positive
    logic signed [DP_W-1:0] l1;      // m, must be positive
    logic signed [DP_W-1:0] l2;      // m, must be positive
  } dp_seed_t;

  // Default seed: theta1 = 2.0, theta2 = 1.0 rad, m1 = m2 = 1 kg,
  // l1 = l2 = 1 m.
  localparam dp_seed_t DP_SEED_DEFAULT = '{
    theta1: 32'sd2097152, theta2: 32'sd1048576,
    m1: 32'sd1048576, m2: 32'sd1048576,
    l1: 32'sd1048576, l2: 32'sd1048576
  };

  // Fixed-point multiply of two Q.DP_FRAC numbers, result in Q.DP_FRAC.
  function automatic logic signed [DP_W-1:0] qmul(input logic signed [DP_W-1:0] a,
                                                   input logic signed [DP_W-1:0] b);
    logic signed [2*DP_W-1:0] p;
    p = a * b;
    return p[DP_FRAC +: DP_W];
  endfunction

  // Wrap an angle in (-3*pi, 3*pi) into [-pi, pi).
  function automatic logic signed [DP_W-1:0] wrap_pi(input logic signed [DP_W-1:0] a);
    logic signed [DP_W-1:0] t;
    t = a;
    if (t >= DP_PI) t = t - DP_TWOPI;
    if (t >= DP_PI) t = t - DP_TWOPI;
    if (t < -DP_PI) t = t + DP_TWOPI;
    if (t < -DP_PI) t = t + DP_TWOPI;
    return t;
  endfunction

endpackage
