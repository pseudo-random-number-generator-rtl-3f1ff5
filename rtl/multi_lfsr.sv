// multi_lfsr: multi-LFSR random number generator with sensor entropy input.
//
// Four maximal-length LFSRs of co-prime lengths 15, 17, 23 and 31 bits
// (trinomials x^15+x+1, x^17+x^3+1, x^23+x^5+1, x^31+x^3+1) advance together
// by 15 places every clock (unrolled feedback), so no bit of a word is left
// over from the word before.  The output word is
// {s17[16], s15} xor s17[15:0] xor s23[15:0] xor s31[15:0].  The
// paper describes combining several LFSRs with different feedback
// polynomials through XOR to lengthen the period, and environmental sensors
// as an extra entropy source; the number of LFSRs, their lengths and taps
// and the way sensor bits enter are this design's own choices.  Because the
// lengths are pairwise co-prime, the combined state repeats only after the
// product of the four periods (about 2^86 clocks).
//
// Sensor entropy: a sensor_valid pulse XORs sensor_data (rotated differently
// for each register) into all four states on that clock.
//
// Timing: rnd is registered and a new word appears every enabled clock; the
// latency from en to a new rnd_valid word is one clock, matching the 1-2
// clock latency the paper reports for its multi-LFSR.
module multi_lfsr #(
  parameter int unsigned OUT_W  = prng_pkg::RND_W,
  parameter int unsigned SENS_W = 16,
  parameter logic [30:0] SEED   = 31'h2545_F491
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              sensor_valid,
  input  logic [SENS_W-1:0] sensor_data,
  output logic [OUT_W-1:0]  rnd,
  output logic              rnd_valid
);

  // Places each register advances per clock: all bits of the shortest one.
  localparam int unsigned ADV = 15;

  logic [14:0] s15;
  logic [16:0] s17;
  logic [22:0] s23;
  logic [30:0] s31;

  // Sensor word repeated over 31 bits, then sliced per register.
  logic [30:0] sens_spread;
  always_comb begin
    sens_spread = '0;
    for (int i = 0; i < 31; i++) sens_spread[i] = sensor_data[i % SENS_W];
  end

  lfsr #(.WIDTH(15), .STEP(ADV), .TAP(1), .SEED(SEED[14:0]))
    u_l15 (.clk, .rst_n, .en, .inject(sensor_valid), .inject_data(sens_spread[14:0]), .state(s15));
  lfsr #(.WIDTH(17), .STEP(ADV), .TAP(3), .SEED(SEED[30:14]))
    u_l17 (.clk, .rst_n, .en, .inject(sensor_valid), .inject_data(sens_spread[16:0] ^ 17'h1_5A5A), .state(s17));
  lfsr #(.WIDTH(23), .STEP(ADV), .TAP(5), .SEED(SEED[22:0] ^ 23'h5E_3C1B))
    u_l23 (.clk, .rst_n, .en, .inject(sensor_valid), .inject_data({sens_spread[7:0], sens_spread[30:16]}), .state(s23));
  lfsr #(.WIDTH(31), .STEP(ADV), .TAP(3), .SEED(SEED ^ 31'h1357_9BDF))
    u_l31 (.clk, .rst_n, .en, .inject(sensor_valid), .inject_data({sens_spread[15:0], sens_spread[30:16]}), .state(s31));

  // Registered output: combination of the current states.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rnd       <= '0;
      rnd_valid <= 1'b0;
    end else begin
      rnd_valid <= en;
      if (en) rnd <= OUT_W'({s17[16], s15} ^ s17[15:0] ^ s23[15:0] ^ s31[15:0]);
    end
  end

endmodule
