// tb_clt_gaussian: self-checking testbench for clt_gaussian.
//
// Feeds random 32-bit samples with random gaps and checks that each output is
// the exact sum of the next four inputs, that it appears one clock after the
// fourth sample, and that no extra outputs appear.  It then sums uniform
// samples and checks that the mean and variance of the sums match the CLT
// prediction (mean 4*0.5, variance 4/12 in units of 2^32).
module tb_clt_gaussian;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic        rst_n, in_valid, out_valid;
  logic [31:0] in;
  logic [33:0] out;

  clt_gaussian #(.IN_W(32), .N(4)) dut (.clk, .rst_n, .in, .in_valid, .out, .out_valid);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned sum;
  int              k, nout;
  real             s, mean, var2, acc, acc2;

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    sum = 0; k = 0; nout = 0; acc = 0; acc2 = 0;
    for (int c = 0; c < 40000; c++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      in = $urandom;
      @(posedge clk);
      #1;
      if (in_valid) begin
        sum += in;
        k++;
        if (k == 4) begin
          check(out_valid, $sformatf("out_valid after 4th sample at clock %0d", c));
          check(64'(out) == sum, $sformatf("sum %h expected %h", out, sum));
          s = real'(out) / 4294967296.0;
          acc += s; acc2 += s * s;
          nout++;
          sum = 0; k = 0;
        end else begin
          check(!out_valid, "no output inside a group");
        end
      end else begin
        check(!out_valid, "no output without input");
      end
    end
    mean = acc / nout;
    var2 = acc2 / nout - mean * mean;
    check(mean > 1.95 && mean < 2.05, $sformatf("mean %f", mean));
    check(var2 > 0.31 && var2 < 0.356, $sformatf("variance %f", var2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
