// double_pendulum: chaotic double pendulum solver used as a random number
// generator.
//
// The state is the two rod angles theta1, theta2 and angular velocities
// omega1, omega2.  Each step evaluates the angular accelerations of the
// paper's Eqs. (7)-(10):
//   d1  = L1 (2 m1 + m2 - m2 cos(2 th1 - 2 th2))
//   d2  = L2 (2 m1 + m2 - m2 cos(2 th1 - 2 th2))
//   a1  = [-g (2 m1 + m2) sin th1 - m2 g sin(th1 - 2 th2)
//          - 2 sin(th1 - th2) m2 (w2^2 L2 + w1^2 L1 cos(th1 - th2))] / d1
//   a2  = 2 sin(th1 - th2) [w1^2 L1 (m1 + m2) + g (m1 + m2) cos th1
//          + w2^2 L2 m2 cos(th1 - th2)] / d2
// and advances the state by one time step dt = 2^-DT_SHIFT s.  The
// integration rule is this design's choice (the paper gives only the
// equations): semi-implicit Euler, w += a dt then th += w dt with the new w,
// which keeps the energy bounded far better than explicit Euler.  Angles are
// wrapped into [-pi, pi); velocities are clamped to +-OMEGA_MAX rad/s so
// that the fixed-point range (Q11.20) cannot overflow.
//
// As in the paper, the starting angles, masses and lengths form the seed
// (seed port, loaded at reset and on seed_load; velocities start at zero).
// The random output is the low RND_W bits of theta1 xor theta2, this
// design's choice.
//
// Sensor entropy (this design's choice of how the paper's environmental
// sensors reach this generator): an inject pulse XORs inject_data into the
// least significant INJ_W bits of theta2 at the next state update (a change
// of at most 2^-4 rad for INJ_W = 16); the chaotic motion amplifies it.
// Pulses before that update accumulate by XOR.
//
// Datapath per step (about 78 clocks): three CORDIC units in parallel give
// sin/cos of th1, th1 - th2 and th1 - 2 th2, cos(2 th1 - 2 th2) is formed as
// cos^2 - sin^2 of (th1 - th2); one clock evaluates numerators and
// denominators; two sequential dividers run in parallel; one clock updates
// the state.  The paper reports 20-50+ clocks for its double pendulum.
//
// Interface: while en is high steps run back to back; rnd_valid pulses for
// one clock with each new rnd.  The state is visible on the theta/omega
// outputs, updated together with rnd.
module double_pendulum
  import prng_pkg::*;
#(
  parameter int unsigned   OUT_W     = RND_W,
  parameter int unsigned   DT_SHIFT  = 8,
  parameter int            OMEGA_MAX = 256,
  parameter int unsigned   INJ_W     = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   inject,
  input  logic [INJ_W-1:0]       inject_data,
  input  logic                   seed_load,
  input  dp_seed_t               seed,
  output logic [OUT_W-1:0]       rnd,
  output logic                   rnd_valid,
  output logic signed [DP_W-1:0] theta1,
  output logic signed [DP_W-1:0] theta2,
  output logic signed [DP_W-1:0] omega1,
  output logic signed [DP_W-1:0] omega2
);

  typedef enum logic [2:0] {S_IDLE, S_TRIG, S_FORCE, S_DIV, S_UPDATE} state_e;
  state_e st;

  localparam logic signed [DP_W-1:0] WMAX = DP_W'(OMEGA_MAX) <<< DP_FRAC;

  logic signed [DP_W-1:0] m1, m2, l1, l2;

  // ---- trigonometry ------------------------------------------------------
  logic                   trig_start;
  logic signed [DP_W-1:0] ang_a, ang_b, ang_c;
  logic                   busy_a, busy_b, busy_c, done_a, done_b, done_c;
  logic signed [DP_W-1:0] s1, c1, sd, cd, s12, c12_unused;
  logic                   got_a, got_b, got_c;

  assign ang_a = theta1;
  assign ang_b = wrap_pi(theta1 - theta2);
  assign ang_c = wrap_pi(theta1 - theta2 - theta2);

  cordic u_cordic_a (.clk, .rst_n, .start(trig_start), .angle(ang_a),
                     .busy(busy_a), .done(done_a), .sin_o(s1), .cos_o(c1));
  cordic u_cordic_b (.clk, .rst_n, .start(trig_start), .angle(ang_b),
                     .busy(busy_b), .done(done_b), .sin_o(sd), .cos_o(cd));
  cordic u_cordic_c (.clk, .rst_n, .start(trig_start), .angle(ang_c),
                     .busy(busy_c), .done(done_c), .sin_o(s12), .cos_o(c12_unused));

  // ---- numerators and denominators (Eqs. 7-10) ---------------------------
  logic signed [DP_W-1:0] msum2, mtot, c2d, den, d1, d2, w1sq, w2sq;
  logic signed [DP_W-1:0] t1, t2, n1, n2;

  always_comb begin
    msum2 = (m1 <<< 1) + m2;                         // 2 m1 + m2
    mtot  = m1 + m2;                                 // m1 + m2
    c2d   = qmul(cd, cd) - qmul(sd, sd);             // cos(2 th1 - 2 th2)
    den   = msum2 - qmul(m2, c2d);
    d1    = qmul(l1, den);
    d2    = qmul(l2, den);
    w1sq  = qmul(omega1, omega1);
    w2sq  = qmul(omega2, omega2);
    t1    = qmul(w2sq, l2) + qmul(qmul(w1sq, l1), cd);
    n1    = - qmul(qmul(DP_G, msum2), s1)
            - qmul(qmul(m2, DP_G), s12)
            - qmul(qmul(sd <<< 1, m2), t1);
    t2    = qmul(qmul(w1sq, l1), mtot)
            + qmul(qmul(DP_G, mtot), c1)
            + qmul(qmul(w2sq, l2), qmul(m2, cd));
    n2    = qmul(sd <<< 1, t2);
  end

  // ---- division ----------------------------------------------------------
  logic                   div_start;
  logic signed [DP_W-1:0] n1_r, n2_r, d1_r, d2_r, a1, a2;
  logic                   busy_d1, busy_d2, done_d1, done_d2, got_d1, got_d2;

  seq_div #(.W(DP_W), .FRAC(DP_FRAC)) u_div1 (.clk, .rst_n, .start(div_start),
    .n(n1_r), .d(d1_r), .busy(busy_d1), .done(done_d1), .q(a1));
  seq_div #(.W(DP_W), .FRAC(DP_FRAC)) u_div2 (.clk, .rst_n, .start(div_start),
    .n(n2_r), .d(d2_r), .busy(busy_d2), .done(done_d2), .q(a2));

  // ---- state update ------------------------------------------------------
  function automatic logic signed [DP_W-1:0] clamp_w(input logic signed [DP_W-1:0] w,
                                                     input logic signed [DP_W-1:0] dw);
    logic signed [DP_W:0] s;
    s = {w[DP_W-1], w} + {dw[DP_W-1], dw};
    if (s > (DP_W+1)'(WMAX))       return WMAX;
    else if (s < -(DP_W+1)'(WMAX)) return -WMAX;
    else                           return s[DP_W-1:0];
  endfunction

  logic signed [DP_W-1:0] w1_new, w2_new, th1_new, th2_new;
  logic [INJ_W-1:0]       inj_acc, inj_now;
  assign w1_new  = clamp_w(omega1, a1 >>> DT_SHIFT);
  assign w2_new  = clamp_w(omega2, a2 >>> DT_SHIFT);
  assign inj_now = inj_acc ^ (inject ? inject_data : '0);
  assign th1_new = wrap_pi(theta1 + (w1_new >>> DT_SHIFT));
  assign th2_new = wrap_pi(wrap_pi(theta2 + (w2_new >>> DT_SHIFT)) ^ DP_W'(inj_now));

  always_ff @(posedge clk) begin
    if (!rst_n || seed_load) begin
      st         <= S_IDLE;
      theta1     <= wrap_pi(seed.theta1);
      theta2     <= wrap_pi(seed.theta2);
      omega1     <= '0;
      omega2     <= '0;
      m1         <= seed.m1;
      m2         <= seed.m2;
      l1         <= seed.l1;
      l2         <= seed.l2;
      trig_start <= 1'b0;
      div_start  <= 1'b0;
      got_a      <= 1'b0;
      got_b      <= 1'b0;
      got_c      <= 1'b0;
      got_d1     <= 1'b0;
      got_d2     <= 1'b0;
      n1_r       <= '0;
      n2_r       <= '0;
      d1_r       <= '0;
      d2_r       <= '0;
      rnd        <= '0;
      rnd_valid  <= 1'b0;
      inj_acc    <= '0;
    end else begin
      inj_acc    <= inj_now;
      trig_start <= 1'b0;
      div_start  <= 1'b0;
      rnd_valid  <= 1'b0;
      unique case (st)
        // a seed_load in mid-step leaves units running: wait for them
        S_IDLE: if (en && !busy_a && !busy_b && !busy_c && !busy_d1 && !busy_d2) begin
          trig_start <= 1'b1;
          got_a      <= 1'b0;
          got_b      <= 1'b0;
          got_c      <= 1'b0;
          st         <= S_TRIG;
        end
        S_TRIG: begin
          if (done_a) got_a <= 1'b1;
          if (done_b) got_b <= 1'b1;
          if (done_c) got_c <= 1'b1;
          if ((got_a || done_a) && (got_b || done_b) && (got_c || done_c)) st <= S_FORCE;
        end
        S_FORCE: begin
          n1_r      <= n1;
          n2_r      <= n2;
          d1_r      <= d1;
          d2_r      <= d2;
          div_start <= 1'b1;
          got_d1    <= 1'b0;
          got_d2    <= 1'b0;
          st        <= S_DIV;
        end
        S_DIV: begin
          if (done_d1) got_d1 <= 1'b1;
          if (done_d2) got_d2 <= 1'b1;
          if ((got_d1 || done_d1) && (got_d2 || done_d2)) st <= S_UPDATE;
        end
        S_UPDATE: begin
          omega1    <= w1_new;
          omega2    <= w2_new;
          theta1    <= th1_new;
          theta2    <= th2_new;
          rnd       <= OUT_W'(th1_new ^ th2_new);
          rnd_valid <= 1'b1;
          inj_acc   <= '0;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The start pulses only ever reach idle units.
  assert property (@(posedge clk) disable iff (!rst_n) trig_start |-> !busy_a && !busy_b && !busy_c);
  assert property (@(posedge clk) disable iff (!rst_n) div_start |-> !busy_d1 && !busy_d2);

endmodule
