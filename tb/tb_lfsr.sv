// tb_lfsr: self-checking testbench for lfsr.
//
// Checks, on a 7-bit register (x^7 + x + 1) and on the default 31-bit one:
//  - the stream of inserted bits obeys b(t) = b(t-WIDTH) xor b(t-TAP), the
//    two-tap recurrence, written here on the bit stream rather than on the
//    register;
//  - the 7-bit register visits all 127 non-zero states before repeating;
//  - a leap-forward instance (STEP = 5) equals five single steps;
//  - en low holds the state; inject XORs data into the next state and an
//    all-zero result becomes 1.
module tb_lfsr;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic rst_n, en7, inj7, en31, inj31;
  logic [6:0]  d7, s7;
  logic [30:0] d31, s31;

  lfsr #(.WIDTH(7), .TAP(1), .SEED(7'h01)) u7 (.clk, .rst_n, .en(en7), .inject(inj7), .inject_data(d7), .state(s7));
  logic [6:0] s7x5;
  lfsr #(.WIDTH(7), .TAP(1), .STEP(5), .SEED(7'h01)) u7x5 (.clk, .rst_n, .en(en7), .inject(1'b0), .inject_data(7'h0), .state(s7x5));
  lfsr u31 (.clk, .rst_n, .en(en31), .inject(inj31), .inject_data(d31), .state(s31));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit    b7[$];
  bit    b31[$];
  bit    seen[128];
  int    period;
  logic [6:0] start7, prev7;
  logic [7:0] ref5;

  initial begin
    rst_n = 1'b0; en7 = 1'b0; inj7 = 1'b0; en31 = 1'b0; inj31 = 1'b0; d7 = '0; d31 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(s7 == 7'h01, "7-bit seed");
    check(s31 == 31'h1, "31-bit seed");
    // record the initial register bits as the oldest stream bits
    for (int j = 6; j >= 0; j--) b7.push_back(s7[j]);
    for (int j = 30; j >= 0; j--) b31.push_back(s31[j]);
    // full period of the 7-bit register
    start7 = s7;
    ref5 = 8'h01;
    period = 0;
    en7 = 1'b1; en31 = 1'b1;
    do begin
      check(!seen[s7], $sformatf("state %0h repeats early", s7));
      seen[s7] = 1'b1;
      @(negedge clk);
      period++;
      b7.push_back(s7[0]);
      repeat (5) ref5 = ((ref5 << 1) | (((ref5 >> 6) ^ ref5) & 1)) & 8'h7F;
      check(s7x5 == 7'(ref5), $sformatf("leap-forward state %h expected %h", s7x5, ref5));
      b31.push_back(s31[0]);
    end while (s7 != start7 && period < 200);
    check(s7x5 == s7, "leap-forward instance back at the seed after 127 clocks");
    check(period == 127, $sformatf("7-bit period %0d, expected 127", period));
    check(!seen[0], "all-zero state reached");
    // recurrence on the bit streams
    for (int t = 7; t < b7.size(); t++)
      check(b7[t] == (b7[t-7] ^ b7[t-1]), $sformatf("7-bit recurrence at %0d", t));
    for (int t = 31; t < b31.size(); t++)
      check(b31[t] == (b31[t-31] ^ b31[t-3]), $sformatf("31-bit recurrence at %0d", t));
    // en low holds
    en7 = 1'b0;
    prev7 = s7;
    repeat (3) @(negedge clk);
    check(s7 == prev7, "hold with en low");
    // injection
    d7 = 7'h55; inj7 = 1'b1; en7 = 1'b1;
    prev7 = s7;
    @(negedge clk);
    check(s7 == ({prev7[5:0], prev7[6] ^ prev7[0]} ^ 7'h55), "inject xor");
    // injection producing zero
    inj7 = 1'b1; en7 = 1'b0; d7 = s7;
    @(negedge clk);
    check(s7 == 7'h01, "zero guard");
    inj7 = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
