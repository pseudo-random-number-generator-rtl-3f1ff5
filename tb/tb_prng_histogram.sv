// tb_prng_histogram: histogram and time-series tests of the four output
// modes of prng_top, the kind of randomness evidence the design's source
// reports for its generators.
//
// For each mode the testbench collects samples from rnd and computes:
//  - a 16-bin histogram of the top four bits and its chi-square against a
//    uniform distribution (15 degrees of freedom; the 99.9 % point is 37.7,
//    the limit used here for the uniform modes);
//  - the fraction of ones in each of the 16 bit positions (must lie within
//    0.5 +- 5 standard deviations of a fair coin);
//  - the lag-1 serial correlation of successive samples (|r| < 0.1).
// The logistic mode is a sum of four successive iterates of the map, which
// is neither uniform nor a smooth bell curve (the iterates are correlated).
// For it the testbench runs the same map and summation in real arithmetic
// from the same starting point and requires the hardware mean within 2 %,
// and each of the 16 bin counts within 3 % of the sample count, of that
// reference; the lag-1 correlation must also be small.  The top runs at 10 clocks per UART
// bit so that the serial output does not matter.
module tb_prng_histogram;
  import prng_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic        rst_n;
  gen_sel_e    gen_sel;
  logic [15:0] rnd, lat;
  logic [31:0] skips;
  logic        rv, lv, take, txd;

  prng_top #(.CLK_HZ(1_000_000), .BAUD(100_000)) dut (
    .clk, .rst_n, .gen_sel, .sensor_data(16'h0), .sensor_valid(1'b0),
    .dp_seed_load(1'b0), .dp_seed(DP_SEED_DEFAULT),
    .rnd, .rnd_valid(rv), .latency(lat), .latency_valid(lv),
    .print_take(take), .print_skips(skips), .uart_txd(txd));

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic analyse(gen_sel_e m, int nsamples);
    int   hist[16];
    int   ones[16];
    real  chi, ev, mean, sxy, sxx, prev, x, r, p, sd, meanx;
    real  xs[$];
    int   n = 0;
    for (int i = 0; i < 16; i++) begin hist[i] = 0; ones[i] = 0; end
    @(negedge clk);
    gen_sel = m;
    repeat (4) @(posedge clk);
    while (n < nsamples) begin
      @(posedge clk); #1;
      if (rv) begin
        hist[rnd[15:12]]++;
        for (int b = 0; b < 16; b++) ones[b] += rnd[b];
        xs.push_back(real'(rnd));
        n++;
      end
    end
    // lag-1 correlation
    meanx = 0.0;
    foreach (xs[i]) meanx += xs[i];
    meanx /= n;
    sxy = 0.0; sxx = 0.0;
    for (int i = 0; i < n; i++) begin
      sxx += (xs[i] - meanx) * (xs[i] - meanx);
      if (i > 0) sxy += (xs[i] - meanx) * (xs[i-1] - meanx);
    end
    r = sxy / sxx;
    check(r < 0.1 && r > -0.1, $sformatf("%s lag-1 correlation %f", m.name(), r));
    ev = real'(n) / 16.0;
    chi = 0.0;
    for (int i = 0; i < 16; i++) chi += (hist[i] - ev) * (hist[i] - ev) / ev;
    if (m == GEN_LOGISTIC) begin
      real xr, sum, rmean;
      int  rhist[16];
      int  k;
      for (int i = 0; i < 16; i++) rhist[i] = 0;
      xr = 0.3141592;
      rmean = 0.0;
      for (int i = 0; i < n; i++) begin
        sum = 0.0;
        for (int j = 0; j < 4; j++) begin
          xr = 3.99 * xr * (1.0 - xr);
          sum += xr;
        end
        k = int'($floor(sum / 4.0 * 16.0));
        rhist[k]++;
        rmean += sum / 4.0 * 65536.0;
      end
      rmean /= n;
      check(meanx > 0.98 * rmean && meanx < 1.02 * rmean,
            $sformatf("logistic mean %f against real-valued map %f", meanx, rmean));
      for (int i = 0; i < 16; i++)
        check(hist[i] - rhist[i] < 0.03 * n && rhist[i] - hist[i] < 0.03 * n,
              $sformatf("logistic bin %0d: %0d against real-valued map %0d", i, hist[i], rhist[i]));
      $display("real-valued map mean=%8.1f hist=%p", rmean, rhist);
    end else begin
      check(chi < 37.7, $sformatf("%s chi-square %f over 16 bins", m.name(), chi));
      sd = 0.5 / $sqrt(real'(n));
      for (int b = 0; b < 16; b++) begin
        p = real'(ones[b]) / n;
        check(p > 0.5 - 5.0 * sd && p < 0.5 + 5.0 * sd, $sformatf("%s bit %0d ones %f", m.name(), b, p));
      end
    end
    $display("%-12s n=%0d mean=%8.1f chi2=%7.2f lag1=%7.4f hist=%p", m.name(), n, meanx, chi, r, hist);
  endtask

  initial begin
    rst_n = 1'b0;
    gen_sel = GEN_LFSR;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    analyse(GEN_LFSR, 20000);
    analyse(GEN_LOGISTIC, 8000);
    analyse(GEN_PENDULUM, 4000);
    analyse(GEN_MIXED, 4000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
