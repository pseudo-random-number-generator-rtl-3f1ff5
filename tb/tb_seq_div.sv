// tb_seq_div: self-checking testbench for the seq_div helper.
//
// Divides random signed Q11.20 operands of all sign combinations and
// magnitudes and compares the quotient with real division: it must be
// truncated towards zero (error below one LSB) or, where the true quotient
// is out of range, saturated with the right sign.  Division by zero must
// return the largest magnitude with the numerator's sign.  Also checks the
// fixed latency of W+FRAC+1 clocks from the start pulse to done.
module tb_seq_div;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic               rst_n, start, busy, done;
  logic signed [31:0] n, d, q;

  seq_div #(.W(32), .FRAC(20)) dut (.clk, .rst_n, .start, .n, .d, .busy, .done, .q);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0, t0;
  always @(posedge clk) cycle++;

  localparam real SC   = 1048576.0;
  localparam real QMAX = 2147483647.0;

  task automatic run(logic signed [31:0] nn, logic signed [31:0] dd);
    real exact;
    longint expq;
    @(negedge clk);
    n = nn; d = dd; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cycle;
    @(posedge clk);
    while (!done) @(posedge clk);
    check(cycle - t0 == 32 + 20 + 1, $sformatf("latency %0d", cycle - t0));
    #1;
    if (dd == 0) begin
      check(q == (nn < 0 ? -32'sd2147483647 : 32'sd2147483647), "division by zero saturates");
    end else begin
      exact = real'(nn) * SC / real'(dd);          // quotient in LSBs
      if (exact >= QMAX)       check(q == 32'sd2147483647, $sformatf("%0d/%0d saturates high", nn, dd));
      else if (exact <= -QMAX) check(q == -32'sd2147483647, $sformatf("%0d/%0d saturates low", nn, dd));
      else begin
        expq = longint'(exact);                    // may round; allow one LSB
        check(real'(q) - exact < 1.0 && exact - real'(q) < 1.0 &&
              ((exact >= 0) ? (real'(q) <= exact) : (real'(q) >= exact)),
              $sformatf("%0d/%0d = %0d, exact %f", nn, dd, q, exact));
      end
    end
  endtask

  logic signed [31:0] rn, rd;
  initial begin
    rst_n = 1'b0; start = 1'b0; n = '0; d = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(32'sd1048576, 32'sd2097152);      // 1 / 2
    run(-32'sd3145728, 32'sd1048576);     // -3 / 1
    run(32'sd1048576, -32'sd3145728);     // 1 / -3
    run(32'sd5, 32'sd0);
    run(-32'sd5, 32'sd0);
    run(32'sd2000000000, 32'sd1);         // overflow
    run(-32'sd2000000000, 32'sd3);
    for (int i = 0; i < 2000; i++) begin
      rn = $urandom;
      rd = $urandom;
      rn = rn >>> ($urandom % 24);
      rd = rd >>> ($urandom % 24);
      run(rn, rd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
