// tb_logistic_map: self-checking testbench for logistic_map.
//
// The reference computes x' = r x (1 - x) in the same Q0.32 / Q2.30 number
// format with 64-bit integer arithmetic (products truncated), and checks
// every iterate exactly.  A second, real-valued computation of r x (1 - x)
// from the same x bounds the truncation error to a few LSBs of 2^-32.  It
// also checks the two-clock iteration (x_valid every second clock), that
// iterates stay in (0, 1) and that en low stops the map.  Every 50th
// iterate a sensor word is injected; the model XORs it into the low 16 bits
// of the next iterate.
module tb_logistic_map;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam longint unsigned R  = 64'd4284229878;
  localparam longint unsigned X0 = 64'd1349303490;

  logic        rst_n, en, inject;
  logic [15:0] inject_data;
  logic [31:0] x;
  logic        x_valid;

  logistic_map dut (.clk, .rst_n, .en, .inject, .inject_data, .x, .x_valid);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned ref_x, p;
  real             rx, rr, err;
  int              last_cycle, cycle, nvalid;
  real             minv = 1.0, maxv = 0.0;
  longint unsigned inj;
  int              ninj = 0;

  always @(posedge clk) cycle++;

  // iteration timing: while en stays high, x_valid every second clock
  always @(posedge clk) begin
    #1;
    if (!en) last_cycle = -1;
    else if (x_valid) begin
      if (last_cycle >= 0) check(cycle - last_cycle == 2, $sformatf("iteration took %0d clocks", cycle - last_cycle));
      last_cycle = cycle;
    end
  end

  initial begin
    rst_n = 1'b0; en = 1'b0; inject = 1'b0; inject_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(x == 32'(X0), "seed after reset");
    ref_x = X0;
    rr = real'(R) / 1073741824.0;
    en = 1'b1;
    last_cycle = -1;
    inj = 0;
    for (int n = 0; n < 2000; n++) begin
      do @(posedge clk); while (!x_valid);
      // reference iterate
      p = (ref_x * ((64'd1 << 32) - ref_x)) >> 32;
      rx = real'(ref_x) / 4294967296.0;
      ref_x = ((R * p) >> 30) ^ inj;
      if (ref_x == 0) ref_x = X0;
      check(64'(x) == ref_x, $sformatf("iterate %0d: %h expected %h", n, x, ref_x));
      err = real'(x ^ 32'(inj)) / 4294967296.0 - rr * rx * (1.0 - rx);
      if (err < 0) err = -err;
      check(err < 4.0e-9, $sformatf("iterate %0d off the real map by %g", n, err));
      // inject a sensor word into the next iterate now and then
      inj = 0;
      if (n % 50 == 25) begin
        @(negedge clk);
        inject_data = 16'($urandom);
        inject = 1'b1;
        inj = inject_data;
        ninj++;
        @(negedge clk);
        inject = 1'b0;
      end
      if (real'(x) / 4294967296.0 < minv) minv = real'(x) / 4294967296.0;
      if (real'(x) / 4294967296.0 > maxv) maxv = real'(x) / 4294967296.0;
    end
    check(ninj >= 30, "sensor words injected");
    // chaotic orbit covers most of the interval
    check(minv < 0.05 && maxv > 0.95, $sformatf("orbit range %f..%f", minv, maxv));
    @(negedge clk);
    en = 1'b0;
    nvalid = 0;
    repeat (6) begin @(posedge clk); #1; if (x_valid) nvalid++; end
    check(nvalid <= 1, "en low stops the map");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
