// lfsr: maximal-length Fibonacci linear feedback shift register with two taps.
//
// Each enabled clock the register shifts left by one place and the new bit
// 0 is the XOR of two earlier bits, X_n = X_{n-WIDTH} xor X_{n-TAP}, which is
// the two-tap recurrence of the paper's Eq. (3).  With the trinomial
// x^WIDTH + x^TAP + 1 primitive, the state walks through all 2^WIDTH - 1
// non-zero values.  The choice of trinomials is this design's own; the paper
// names no tap positions.
//
// STEP > 1 unrolls the shift: the register advances STEP places per
// enabled clock (leap-forward), so that a word of STEP output bits is all
// new on every clock.
//
// Entropy injection (this design's choice of how sensor bits enter): when
// inject is high the register loads (next state xor inject_data).  An
// all-zero result, which would lock the register, is replaced by 1.
//
// Interface: state is the register itself, registered; it changes one clock
// after en (or inject) is seen.  Synchronous active-low reset loads SEED.
module lfsr #(
  parameter int unsigned       WIDTH = 31,
  parameter int unsigned       TAP   = 3,
  parameter int unsigned       STEP  = 1,
  parameter logic [WIDTH-1:0]  SEED  = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             inject,
  input  logic [WIDTH-1:0] inject_data,
  output logic [WIDTH-1:0] state
);

  logic [WIDTH-1:0] shifted;
  logic [WIDTH-1:0] mixed;

  always_comb begin
    shifted = state;
    if (en)
      for (int k = 0; k < STEP; k++)
        shifted = {shifted[WIDTH-2:0], shifted[WIDTH-1] ^ shifted[TAP-1]};
    mixed   = inject ? (shifted ^ inject_data) : shifted;
    if (mixed == '0) mixed = WIDTH'(1);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= (SEED == '0) ? WIDTH'(1) : SEED;
    else        state <= mixed;
  end

  initial begin
    assert (TAP >= 1 && TAP < WIDTH) else $error("lfsr: TAP must lie in 1..WIDTH-1");
    assert (STEP >= 1 && STEP <= WIDTH) else $error("lfsr: STEP must lie in 1..WIDTH");
  end

endmodule
