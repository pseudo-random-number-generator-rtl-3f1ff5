// tb_uart_tx: self-checking testbench for uart_tx.
//
// Runs the transmitter at 10 clocks per bit (CLK_HZ 1000, BAUD 100) and
// decodes the line independently: wait for a falling edge, sample every bit
// in its middle, check the start bit, eight data bits LSB first and the stop
// bit.  Checks each frame's length (10 bit times until ready returns) and
// that the line idles high.  Bytes are offered at random moments, some while
// the transmitter is still busy.
module tb_uart_tx;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int DIV = 10;

  logic       rst_n, valid, ready, txd;
  logic [7:0] data;

  uart_tx #(.CLK_HZ(1000), .BAUD(100)) dut (.clk, .rst_n, .data, .valid, .ready, .txd);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned sent[$];
  int           nrx = 0;

  // line decoder
  initial begin
    byte unsigned b;
    forever begin
      @(negedge txd);
      repeat (DIV / 2) @(posedge clk);
      #1 check(txd == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (DIV) @(posedge clk);
        #1 b[i] = txd;
      end
      repeat (DIV) @(posedge clk);
      #1 check(txd == 1'b1, "stop bit");
      check(sent.size() > 0 && b == sent[0], $sformatf("received %h", b));
      if (sent.size() > 0) void'(sent.pop_front());
      nrx++;
    end
  end

  int t0, cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    rst_n = 1'b0; valid = 1'b0; data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    #1 check(txd == 1'b1, "idle high");
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      valid = 1'b1;
      data = 8'($urandom);
      if (n == 0) data = 8'h00;
      if (n == 1) data = 8'hFF;
      @(posedge clk);
      while (!ready) @(posedge clk);
      t0 = cycle;
      sent.push_back(data);
      @(negedge clk);
      valid = 1'b0;
      @(posedge clk);
      while (!ready) @(posedge clk);
      // ready is sampled before the edge that would accept the next byte
      check(cycle - t0 == 10 * DIV, $sformatf("frame took %0d clocks", cycle - t0));
      repeat ($urandom % 3) @(posedge clk);
    end
    repeat (3 * DIV) @(posedge clk);
    check(nrx == 200, $sformatf("received %0d of 200 bytes", nrx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
