// latency_counter: measures the number of clocks between successive samples
// of a generator.
//
// The paper measures each generator's latency by counting clock cycles on
// the board.  This counter runs from one sample strobe to the next and, at
// each strobe, publishes the interval in latency (saturating at all ones)
// and pulses latency_valid.  restart clears the running count without
// publishing, so that a change of generator does not produce a mixed
// interval; the first strobe after restart is therefore not reported.
//
// Timing: latency and latency_valid are registered and change on the clock
// after the strobe.  A strobe on every clock gives latency = 1.
module latency_counter #(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          restart,
  input  logic          strobe,
  output logic [CW-1:0] latency,
  output logic          latency_valid
);

  logic [CW-1:0] count;   // clocks since the last strobe
  logic          armed;   // a strobe has been seen since restart

  always_ff @(posedge clk) begin
    if (!rst_n || restart) begin
      count         <= '0;
      armed         <= 1'b0;
      latency_valid <= 1'b0;
      if (!rst_n) latency <= '0;
    end else begin
      latency_valid <= 1'b0;
      if (strobe) begin
        if (armed) begin
          latency       <= (count == '1) ? count : count + 1'b1;
          latency_valid <= 1'b1;
        end
        armed <= 1'b1;
        count <= '0;
      end else if (count != '1) begin
        count <= count + 1'b1;
      end
    end
  end

endmodule
