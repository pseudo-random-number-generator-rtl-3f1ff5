// tb_latency_counter: self-checking testbench for latency_counter.
//
// A scheduler raises strobe after random gaps of 1 to 60 clocks (runs of
// back-to-back strobes included).  A monitor remembers the clock of every
// strobe and checks each reported latency against the difference of the last
// two, on a 16-bit counter and on a 4-bit one that must saturate at 15.  A
// restart in the middle must suppress the report of the next strobe.
module tb_latency_counter;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic        rst_n, restart, strobe, lv, lv4;
  logic [15:0] lat;
  logic [3:0]  lat4;

  latency_counter dut (.clk, .rst_n, .restart, .strobe, .latency(lat), .latency_valid(lv));
  latency_counter #(.CW(4)) dut4 (.clk, .rst_n, .restart, .strobe, .latency(lat4), .latency_valid(lv4));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  int last_strobe = -1, prev_gap = -1;
  bit expect_report = 1'b0;
  int nreports = 0;

  // monitor: sampled just after each rising edge
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (expect_report) begin
        check(lv, $sformatf("latency_valid expected at clock %0d", cycle));
        check(lat == 16'(prev_gap), $sformatf("latency %0d expected %0d", lat, prev_gap));
        check(lat4 == ((prev_gap > 15) ? 4'hF : 4'(prev_gap)),
              $sformatf("4-bit latency %0d for gap %0d", lat4, prev_gap));
        nreports++;
      end else begin
        check(!lv, $sformatf("no latency_valid expected at clock %0d", cycle));
      end
    end
  end

  // record strobes seen by the edge at 'cycle'
  always @(posedge clk) begin
    cycle <= cycle + 1;
    expect_report = 1'b0;
    if (rst_n && restart) last_strobe = -1;
    else if (rst_n && strobe) begin
      if (last_strobe >= 0) begin
        prev_gap = cycle - last_strobe;
        expect_report = 1'b1;
      end
      last_strobe = cycle;
    end
  end

  int gap;
  initial begin
    rst_n = 1'b0; restart = 1'b0; strobe = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      gap = (n % 50 < 5) ? 1 : 1 + $urandom % 60;
      strobe = 1'b1;
      @(negedge clk);
      strobe = 1'b0;
      repeat (gap - 1) @(negedge clk);
      if (n == 200) begin
        restart = 1'b1;
        @(negedge clk);
        restart = 1'b0;
      end
    end
    repeat (3) @(negedge clk);
    check(nreports >= 390, $sformatf("only %0d latencies reported", nreports));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
