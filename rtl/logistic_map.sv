// logistic_map: fixed-point iteration of the logistic map, Eq. (1) of the
// paper, x(n+1) = r * x(n) * (1 - x(n)).
//
// x is an unsigned fraction in [0, 1) with XW fractional bits; r is an
// unsigned Q2.(XW-2) number in [0, 4).  One iteration takes two clocks and
// one multiplier, used twice (this design's choice; the paper gives only the
// equation, an iteration latency of 5-10 clocks for its logistic-map PRNG
// including shaping, and 3 DSP blocks):
//   phase 0:  p <= x * (1 - x)         (both operands XW-bit fractions)
//   phase 1:  x <= r * p               (rescaled back to XW fractional bits)
// Products are truncated.  A result of exactly zero would trap the map at
// the fixed point 0, so it is replaced by the seed X0.  r defaults to 3.99,
// inside the chaotic region the paper gives (r beyond 3.57); the exact value
// is not given in the paper.
//
// Sensor entropy (this design's choice of how the paper's environmental
// sensors reach this generator): an inject pulse XORs inject_data into the
// least significant INJ_W bits of the next iterate that is written.  The
// map's sensitivity to initial conditions spreads the change to all bits
// within a few dozen iterates.  Several pulses before that write accumulate
// by XOR.
//
// Interface: while en is high the map iterates; x_valid pulses for one clock
// each time a new x is written (every second clock).  Synchronous active-low
// reset loads X0.
module logistic_map #(
  parameter int unsigned     XW   = 32,
  parameter logic [XW-1:0]   R    = 32'd4284229878,  // 3.99 in Q2.30
  parameter logic [XW-1:0]   X0   = 32'd1349303490,  // 0.3141592 in Q0.32
  parameter int unsigned     INJ_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             inject,
  input  logic [INJ_W-1:0] inject_data,
  output logic [XW-1:0] x,
  output logic          x_valid
);

  logic          phase;     // 0: compute x(1-x), 1: multiply by r
  logic [XW-1:0] p;         // x(1-x), fraction with XW bits, at most 1/4

  logic [XW:0]     one_minus_x;
  logic [2*XW:0]   prod_a;
  logic [2*XW-1:0] prod_b;
  logic [XW-1:0]   x_next;
  logic [INJ_W-1:0] inj_acc;   // sensor bits waiting for the next write
  logic [INJ_W-1:0] inj_now;

  always_comb begin
    one_minus_x = {1'b1, {XW{1'b0}}} - {1'b0, x};
    prod_a      = x * one_minus_x;                 // Q0.2XW
    prod_b      = R * p;                           // Q2.(2XW-2)
    inj_now     = inj_acc ^ (inject ? inject_data : '0);
    x_next      = prod_b[XW-2 +: XW] ^ XW'(inj_now); // back to Q0.XW, entropy in
    if (x_next == '0) x_next = X0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x       <= X0;
      p       <= '0;
      phase   <= 1'b0;
      x_valid <= 1'b0;
      inj_acc <= '0;
    end else begin
      x_valid <= 1'b0;
      inj_acc <= inj_now;
      if (en) begin
        phase <= ~phase;
        if (!phase) begin
          p <= prod_a[XW +: XW];
        end else begin
          x       <= x_next;
          x_valid <= 1'b1;
          inj_acc <= '0;
        end
      end
    end
  end

endmodule
