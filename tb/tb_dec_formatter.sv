// tb_dec_formatter: self-checking testbench for dec_formatter.
//
// Sends numbers (0, 9, 10, 65535, powers of ten and random values) and
// collects the byte stream with a sink that accepts at random moments.  Each
// line must equal the SystemVerilog "%0d" rendering of the number followed by
// CR LF.  Also checks that in_ready is low while a number is being printed.
module tb_dec_formatter;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic        rst_n, in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in;
  logic [7:0]  out;

  dec_formatter #(.W(16)) dut (.clk, .rst_n, .in, .in_valid, .in_ready, .out, .out_valid, .out_ready);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string expected[$];
  string line = "";
  int    nlines = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      line = {line, string'(out)};
      if (out == 8'h0A) begin
        check(expected.size() > 0 && line == expected[0],
              $sformatf("line \"%s\" expected \"%s\"", line, expected.size() ? expected[0] : ""));
        if (expected.size() > 0) void'(expected.pop_front());
        line = "";
        nlines++;
      end
    end
  end

  always @(negedge clk) out_ready <= ($urandom % 4) != 0;

  int values[$] = '{0, 9, 10, 65535, 1, 100, 1000, 10000, 99, 12345, 50000, 65534, 7};

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) values.push_back($urandom % 65536);
    foreach (values[i]) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in = 16'(values[i]);
      in_valid = 1'b1;
      expected.push_back($sformatf("%0d\r\n", values[i]));
      @(negedge clk);
      in_valid = 1'b0;
      check(!in_ready, "busy while printing");
    end
    repeat (200) @(posedge clk);
    check(nlines == values.size(), $sformatf("%0d lines of %0d", nlines, values.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
