// tb_double_pendulum: self-checking testbench for double_pendulum.
//
// After every step the testbench takes the state the design reports,
// evaluates the double pendulum accelerations with real arithmetic and
// $sin/$cos (Eqs. 7-10 written out again here), applies one semi-implicit
// Euler step with dt = 2^-8 s and compares the design's next state with it:
// angles and velocities must agree within 2e-4.  Checking step by step keeps
// the chaotic growth of rounding differences out of the comparison.
// It also checks: the output word is the low 16 bits of theta1 xor theta2,
// angles stay in [-pi, pi), the step takes a constant number of clocks of
// at least 20 (the paper's lower bound for this generator), the pendulum
// really moves chaotically (both rods swing through large angles), and a
// seed_load restarts from the seed with zero velocity.  Every 37th step a
// sensor word is injected during the step; the check then undoes the XOR on
// the low 16 bits of theta2 before comparing.
module tb_double_pendulum;
  import prng_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic                   rst_n, en, seed_load, rnd_valid, inject;
  logic [15:0]            inject_data;
  logic [15:0]            inj;
  int                     ninj = 0;
  dp_seed_t               seed;
  logic [15:0]            rnd;
  logic signed [DP_W-1:0] th1, th2, w1, w2;

  double_pendulum dut (.clk, .rst_n, .en, .inject, .inject_data, .seed_load, .seed, .rnd, .rnd_valid,
                       .theta1(th1), .theta2(th2), .omega1(w1), .omega2(w2));

  localparam int STEPS = 1500;

  initial begin
    repeat (STEPS * 100 + 5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real SC = 1048576.0;
  localparam real PI = 3.14159265358979;
  localparam real G  = 9.81;

  function automatic real q2r(logic signed [DP_W-1:0] v);
    return real'(v) / SC;
  endfunction

  function automatic real wrap(real a);
    while (a >= PI) a -= 2.0 * PI;
    while (a < -PI) a += 2.0 * PI;
    return a;
  endfunction

  function automatic real adiff(real a, real b);
    real d = wrap(a - b);
    return (d < 0) ? -d : d;
  endfunction

  function automatic real absr(real a);
    return (a < 0) ? -a : a;
  endfunction

  real m1, m2, l1, l2;
  real t1, t2, o1, o2, den, a1, a2, e1, e2, eo1, eo2, dt;
  real max1, max2;
  int  cycle, last, step_len, nsteps;

  always @(posedge clk) cycle++;

  initial begin
    rst_n = 1'b0; en = 1'b0; seed_load = 1'b0; inject = 1'b0; inject_data = '0;
    seed = DP_SEED_DEFAULT;
    m1 = 1.0; m2 = 1.0; l1 = 1.0; l2 = 1.0;
    dt = 1.0 / 256.0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(th1 == seed.theta1 && th2 == seed.theta2 && w1 == 0 && w2 == 0, "seed loaded at reset");
    en = 1'b1;
    last = -1; step_len = -1; nsteps = 0; max1 = 0; max2 = 0;
    for (int n = 0; n < STEPS; n++) begin
      // expected next state from the current one
      t1 = q2r(th1); t2 = q2r(th2); o1 = q2r(w1); o2 = q2r(w2);
      den = 2.0 * m1 + m2 - m2 * $cos(2.0 * t1 - 2.0 * t2);
      a1 = (-G * (2.0 * m1 + m2) * $sin(t1) - m2 * G * $sin(t1 - 2.0 * t2)
            - 2.0 * $sin(t1 - t2) * m2 * (o2 * o2 * l2 + o1 * o1 * l1 * $cos(t1 - t2))) / (l1 * den);
      a2 = (2.0 * $sin(t1 - t2) * (o1 * o1 * l1 * (m1 + m2) + G * (m1 + m2) * $cos(t1)
            + o2 * o2 * l2 * m2 * $cos(t1 - t2))) / (l2 * den);
      eo1 = o1 + a1 * dt;
      eo2 = o2 + a2 * dt;
      e1 = wrap(t1 + eo1 * dt);
      e2 = wrap(t2 + eo2 * dt);
      inj = '0;
      if (n % 37 == 5 && absr(e2) < 3.0) begin
        @(negedge clk);
        inject_data = 16'($urandom);
        inj = inject_data;
        inject = 1'b1;
        @(negedge clk);
        inject = 1'b0;
        ninj++;
      end
      do @(posedge clk); while (!rnd_valid);
      if (last >= 0) begin
        if (step_len < 0) step_len = cycle - last;
        check(cycle - last == step_len, $sformatf("step %0d took %0d clocks, earlier %0d", n, cycle - last, step_len));
      end
      last = cycle;
      #1;
      check(absr(q2r(w1) - eo1) < 2e-4, $sformatf("step %0d omega1 %f expected %f", n, q2r(w1), eo1));
      check(absr(q2r(w2) - eo2) < 2e-4, $sformatf("step %0d omega2 %f expected %f", n, q2r(w2), eo2));
      check(adiff(q2r(th1), e1) < 2e-4, $sformatf("step %0d theta1 %f expected %f", n, q2r(th1), e1));
      check(adiff(q2r(th2 ^ DP_W'(inj)), e2) < 2e-4,
            $sformatf("step %0d theta2 %f (xor %h) expected %f", n, q2r(th2), inj, e2));
      check(th1 >= -DP_PI && th1 < DP_PI && th2 >= -DP_PI && th2 < DP_PI, "angles wrapped");
      check(rnd == 16'(th1 ^ th2), "rnd is theta1 xor theta2");
      if (absr(q2r(th1)) > max1) max1 = absr(q2r(th1));
      if (absr(q2r(th2)) > max2) max2 = absr(q2r(th2));
      nsteps++;
    end
    check(ninj >= 20, "sensor words injected");
    check(step_len >= 20, $sformatf("step length %0d below 20 clocks", step_len));
    check(max1 > 1.9 && max2 > 2.5, $sformatf("swing %f %f", max1, max2));
    $display("step length %0d clocks, max |theta1| %f, max |theta2| %f", step_len, max1, max2);
    // reseed with different masses and lengths
    @(negedge clk);
    seed.m2 = 32'sd524288;      // 0.5 kg
    seed.l1 = 32'sd1572864;     // 1.5 m
    seed.theta1 = -32'sd1048576;
    seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    check(th1 == seed.theta1 && th2 == seed.theta2 && w1 == 0 && w2 == 0, "seed_load restarts");
    m2 = 0.5; l1 = 1.5;
    for (int n = 0; n < 50; n++) begin
      t1 = q2r(th1); t2 = q2r(th2); o1 = q2r(w1); o2 = q2r(w2);
      den = 2.0 * m1 + m2 - m2 * $cos(2.0 * t1 - 2.0 * t2);
      a1 = (-G * (2.0 * m1 + m2) * $sin(t1) - m2 * G * $sin(t1 - 2.0 * t2)
            - 2.0 * $sin(t1 - t2) * m2 * (o2 * o2 * l2 + o1 * o1 * l1 * $cos(t1 - t2))) / (l1 * den);
      a2 = (2.0 * $sin(t1 - t2) * (o1 * o1 * l1 * (m1 + m2) + G * (m1 + m2) * $cos(t1)
            + o2 * o2 * l2 * m2 * $cos(t1 - t2))) / (l2 * den);
      eo1 = o1 + a1 * dt;
      eo2 = o2 + a2 * dt;
      do @(posedge clk); while (!rnd_valid);
      #1;
      check(absr(q2r(w1) - eo1) < 2e-4, $sformatf("reseeded step %0d omega1 %f expected %f", n, q2r(w1), eo1));
      check(absr(q2r(w2) - eo2) < 2e-4, $sformatf("reseeded step %0d omega2 %f expected %f", n, q2r(w2), eo2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
