// tb_cordic: self-checking testbench for the cordic helper.
//
// Sweeps angles across [-pi, pi] (the ends, +-pi/2 and random values) and
// compares sin/cos with $sin/$cos: the error must stay below 2e-5 (about 20 LSBs).  Also
// checks the fixed latency (done ITER+1 clocks after start) and that start
// is ignored while the unit is busy.
module tb_cordic;
  import prng_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic                   rst_n, start, busy, done;
  logic signed [DP_W-1:0] angle, s, c;

  cordic dut (.clk, .rst_n, .start, .angle, .busy, .done, .sin_o(s), .cos_o(c));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam real SC = 1048576.0;
  real a, es, ec, maxerr = 0.0;
  int  t0, cycle = 0;
  always @(posedge clk) cycle++;

  function automatic real absr(real v);
    return (v < 0) ? -v : v;
  endfunction

  task automatic run(logic signed [DP_W-1:0] ang);
    @(negedge clk);
    angle = ang;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cycle;
    // a second start while busy must be ignored
    angle = 32'sd12345;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    angle = ang;
    @(posedge clk);
    while (!done) @(posedge clk);
    check(cycle - t0 == DP_FRAC + 2, $sformatf("latency %0d", cycle - t0));
    #1;
    a = real'(ang) / SC;
    es = absr(real'(s) / SC - $sin(a));
    ec = absr(real'(c) / SC - $cos(a));
    if (es > maxerr) maxerr = es;
    if (ec > maxerr) maxerr = ec;
    check(es < 2e-5 && ec < 2e-5, $sformatf("angle %f: sin %f cos %f", a, real'(s) / SC, real'(c) / SC));
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; angle = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(DP_PI);
    run(-DP_PI);
    run(DP_HALFPI);
    run(-DP_HALFPI);
    run(DP_HALFPI + 1);
    run(-DP_HALFPI - 1);
    run('0);
    for (int i = 0; i < 1500; i++) run(32'($signed($urandom % (2 * DP_PI + 1)) - DP_PI));
    $display("largest error %g", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
