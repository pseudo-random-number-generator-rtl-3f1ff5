// uart_tx: asynchronous serial transmitter, 8 data bits, no parity, 1 stop
// bit (8N1), least significant bit first, line idle high.
//
// The paper sends the generated numbers over UART to a PC terminal and uses
// the UART transmission time in its latency measurements.  Its terminal
// screenshot shows 9600 baud, 8 data bits, no parity and 1 stop bit, which
// are the defaults here.  The 100 MHz clock is this design's assumption,
// taken from the paper's statement that 1-2 clocks last 10-20 ns.
//
// Interface: valid/ready handshake on data; a byte is taken on a clock where
// both are high.  Each bit lasts CLK_HZ/BAUD clocks (rounded), so one byte
// occupies the line for exactly 10 bit times; ready is already high in the
// last clock of the stop bit, so back-to-back bytes leave no idle gap.
module uart_tx #(
  parameter int unsigned CLK_HZ = 100_000_000,
  parameter int unsigned BAUD   = 9600
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       valid,
  output logic       ready,
  output logic       txd
);

  localparam int unsigned DIV = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned DW  = (DIV > 1) ? $clog2(DIV) : 1;

  logic [7:0]    shreg;    // data bits still to send, ones shifted in for stop
  logic [3:0]    nbits;    // bits still to send, including stop
  logic [DW-1:0] tick;
  logic          busy;

  logic last_tick;   // final clock of the stop bit
  assign last_tick = busy && (tick == DW'(DIV - 1)) && (nbits == 4'd1);
  assign ready     = !busy || last_tick;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      shreg <= '1;
      nbits <= '0;
      tick  <= '0;
      busy  <= 1'b0;
      txd   <= 1'b1;
    end else if (ready) begin
      if (valid) begin
        busy  <= 1'b1;
        shreg <= data;
        nbits <= 4'd10;
        tick  <= '0;
        txd   <= 1'b0;            // start bit goes out at once
      end else begin
        busy  <= 1'b0;
        tick  <= '0;
        txd   <= 1'b1;
      end
    end else if (tick == DW'(DIV - 1)) begin
      tick  <= '0;
      shreg <= {1'b1, shreg[7:1]};
      txd   <= shreg[0];
      nbits <= nbits - 1'b1;
    end else begin
      tick <= tick + 1'b1;
    end
  end

  initial begin
    assert (DIV >= 2) else $error("uart_tx: CLK_HZ/BAUD must be at least 2");
  end

endmodule
