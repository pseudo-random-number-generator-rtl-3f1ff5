// tb_prng_top: end-to-end testbench for prng_top.
//
// Two copies of the top run side by side at 10 clocks per UART bit
// (CLK_HZ 1 MHz, BAUD 100 kBd); copy A receives sensor words and a new
// pendulum seed, copy B never does.  The selector walks through all four
// generator modes.  Checked:
//  - every decimal line on A's serial line equals a sample that A's rnd
//    output offered while the printer was idle, in order, and samples
//    offered while it was busy are counted on print_skips;
//  - measured latency is 1 clock for the multi-LFSR, 8 for the logistic map
//    with CLT shaping, and at least 20 for the pendulum and the mixed mode;
//  - logistic-mode samples are the top 16 bits of sums of four consecutive
//    logistic iterates computed by an integer model here, in order;
//  - before the first sensor word both copies give the same LFSR stream and
//    after it they differ; after the reseed the pendulum streams differ;
//  - only the selected generator runs: the logistic map has not advanced
//    while the LFSR was selected (its first sample is the model's first).
// Each mechanism (mode switch, sensor injection, print skip, reseed, mixed
// output) must happen at least once.
module tb_prng_top;
  import prng_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int DIV = 10;

  logic        rst_n, sensor_valid, seed_load;
  gen_sel_e    gen_sel;
  logic [15:0] sensor_data;
  dp_seed_t    seed_a, seed_b;
  logic [15:0] rnd_a, rnd_b, lat_a, lat_b;
  logic [31:0] skips_a, skips_b;
  logic        take_a, take_b;
  logic        rv_a, rv_b, lv_a, lv_b, txd_a, txd_b;

  prng_top #(.CLK_HZ(1_000_000), .BAUD(100_000)) dut_a (
    .clk, .rst_n, .gen_sel, .sensor_data, .sensor_valid, .dp_seed_load(seed_load), .dp_seed(seed_a),
    .rnd(rnd_a), .rnd_valid(rv_a), .latency(lat_a), .latency_valid(lv_a),
    .print_take(take_a), .print_skips(skips_a), .uart_txd(txd_a));

  prng_top #(.CLK_HZ(1_000_000), .BAUD(100_000)) dut_b (
    .clk, .rst_n, .gen_sel, .sensor_data(16'h0), .sensor_valid(1'b0), .dp_seed_load(1'b0), .dp_seed(seed_b),
    .rnd(rnd_b), .rnd_valid(rv_b), .latency(lat_b), .latency_valid(lv_b),
    .print_take(take_b), .print_skips(skips_b), .uart_txd(txd_b));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- bookkeeping of offered and printed samples ---------------------------
  int          printed_q[$];
  logic [15:0] pending;
  bit          have_pending = 1'b0;
  logic [15:0] skips_prev;
  int          n_lines = 0, n_skips = 0, n_sensor = 0, n_reseed = 0, n_switch = 0;
  int          n_mixed = 0, n_lfsr_diff = 0;

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      // a sample offered on the previous clock was skipped iff the counter moved
      if (have_pending) begin
        if (skips_a != skips_prev) n_skips++;
        else printed_q.push_back(int'(pending));
        have_pending = 1'b0;
      end
      if (rv_a) begin
        pending = rnd_a;
        have_pending = 1'b1;
      end
      skips_prev = skips_a;
    end
  end

  // ---- UART decoder on copy A ---------------------------------------------------
  initial begin
    byte unsigned b;
    string line;
    line = "";
    forever begin
      @(negedge txd_a);
      repeat (DIV / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (DIV) @(posedge clk);
        #1 b[i] = txd_a;
      end
      repeat (DIV) @(posedge clk);
      #1 check(txd_a == 1'b1, "stop bit");
      if (b == 8'h0A) begin
        int v;
        v = line.atoi();
        check(printed_q.size() > 0 && printed_q[0] == v,
              $sformatf("line %0d printed, expected %0d", v, printed_q.size() ? printed_q[0] : -1));
        if (printed_q.size() > 0) void'(printed_q.pop_front());
        n_lines++;
        line = "";
      end else if (b != 8'h0D) begin
        check(b >= 8'h30 && b <= 8'h39, $sformatf("non-digit byte %h", b));
        line = {line, string'(b)};
      end
    end
  end

  // ---- logistic map + CLT model -----------------------------------------------
  localparam longint unsigned R  = 64'd4284229878;
  localparam longint unsigned X0 = 64'd1349303490;
  int unsigned clt_ref[$];
  initial begin
    longint unsigned x, p, s;
    x = X0;
    for (int g = 0; g < 20000; g++) begin
      s = 0;
      for (int k = 0; k < 4; k++) begin
        p = (x * ((64'd1 << 32) - x)) >> 32;
        x = (R * p) >> 30;
        // copy A's first iterate carries the sensor word 16'hBEEF, which
        // arrives while the logistic map is still held
        if (g == 0 && k == 0) x ^= 64'hBEEF;
        if (x == 0) x = X0;
        s += x;
      end
      clt_ref.push_back(int'(s >> 18) & 16'hFFFF);
    end
  end
  int clt_idx = 0;
  bit first_logi = 1'b1;

  // ---- per-mode observation ---------------------------------------------------------
  task automatic run_mode(gen_sel_e m, int clocks);
    int nlat = 0, minlat = 1 << 30, maxlat = 0, nsamp = 0, found;
    @(negedge clk);
    if (gen_sel != m) n_switch++;
    gen_sel = m;
    // the selection takes effect two clocks later
    repeat (3) @(posedge clk);
    repeat (clocks) begin
      @(posedge clk);
      #1;
      if (lv_a) begin
        nlat++;
        if (lat_a < minlat) minlat = lat_a;
        if (lat_a > maxlat) maxlat = lat_a;
      end
      if (rv_a) begin
        nsamp++;
        if (m == GEN_LOGISTIC) begin
          found = 0;
          while (clt_idx < clt_ref.size() && !found) begin
            if (clt_ref[clt_idx] == int'(rnd_a)) found = 1;
            clt_idx++;
          end
          check(found == 1, $sformatf("logistic sample %h not in the model's sequence", rnd_a));
          if (nsamp == 1 && first_logi) begin
            check(clt_idx == 1, $sformatf("logistic map ran while not selected (first sample is group %0d)", clt_idx - 1));
            first_logi = 1'b0;
          end
        end
        if (m == GEN_MIXED) n_mixed++;
      end
    end
    check(nsamp > 0, $sformatf("mode %s produced samples", m.name()));
    check(nlat > 0, $sformatf("mode %s reported latency", m.name()));
    case (m)
      GEN_LFSR:     check(minlat == 1 && maxlat == 1, $sformatf("LFSR latency %0d..%0d", minlat, maxlat));
      GEN_LOGISTIC: check(minlat == 8 && maxlat == 8, $sformatf("logistic latency %0d..%0d", minlat, maxlat));
      default:      check(minlat >= 20 && maxlat == minlat, $sformatf("%s latency %0d..%0d", m.name(), minlat, maxlat));
    endcase
    $display("mode %-12s samples %0d latency %0d..%0d", m.name(), nsamp, minlat, maxlat);
  endtask

  initial begin
    rst_n = 1'b0; sensor_valid = 1'b0; sensor_data = '0; seed_load = 1'b0;
    gen_sel = GEN_LFSR;
    seed_a = DP_SEED_DEFAULT;
    seed_b = DP_SEED_DEFAULT;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // LFSR: copies agree until the first sensor word
    repeat (200) begin
      @(posedge clk); #1;
      if (rv_a && rv_b) check(rnd_a == rnd_b, "LFSR streams equal before sensor input");
    end
    @(negedge clk);
    sensor_data = 16'hBEEF; sensor_valid = 1'b1; n_sensor++;
    @(negedge clk);
    sensor_valid = 1'b0;
    repeat (200) begin
      @(posedge clk); #1;
      if (rv_a && rv_b && rnd_a != rnd_b) n_lfsr_diff++;
    end
    check(n_lfsr_diff > 150, $sformatf("sensor word changed only %0d LFSR words", n_lfsr_diff));

    run_mode(GEN_LFSR, 3000);
    run_mode(GEN_LOGISTIC, 6000);
    run_mode(GEN_PENDULUM, 20000);
    run_mode(GEN_MIXED, 20000);

    // pendulum: reseed copy A, streams must part
    @(negedge clk);
    gen_sel = GEN_PENDULUM; n_switch++;
    seed_a.theta1 = 32'sd2097153;            // 2 rad plus one LSB
    seed_load = 1'b1;
    @(negedge clk);
    seed_load = 1'b0;
    n_reseed++;
    begin
      int ndiff = 0, nboth = 0;
      repeat (30000) begin
        @(posedge clk); #1;
        if (rv_a) nboth++;
        if (rv_a && rnd_a != dut_b.rnd) ndiff++;
      end
      check(nboth > 100, "pendulum samples after reseed");
      check(ndiff > nboth / 2, $sformatf("reseeded stream differs in %0d of %0d", ndiff, nboth));
    end
    run_mode(GEN_LOGISTIC, 4000);

    // let the printer finish its line
    repeat (2000) @(posedge clk);
    $display("lines %0d skips %0d sensor %0d reseed %0d switches %0d mixed %0d",
             n_lines, n_skips, n_sensor, n_reseed, n_switch, n_mixed);
    check(n_lines > 50, $sformatf("only %0d lines printed", n_lines));
    check(n_skips > 0, "print skip happened");
    check(n_sensor > 0, "sensor injection happened");
    check(n_reseed > 0, "pendulum reseed happened");
    check(n_switch >= 4, "mode switches happened");
    check(n_mixed > 0, "mixed samples happened");
    check(skips_a > 0, "print_skips counter moved");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
