// seq_div: sequential signed fixed-point divider, q = n / d.
//
// Both operands and the quotient are signed Q.FRAC numbers of width W.  The
// magnitudes are divided by a restoring shift-subtract loop that produces one
// quotient bit per clock over the W+FRAC bits of the scaled dividend
// |n| * 2^FRAC; the sign is applied at the end and the quotient saturates to
// the W-bit range.  Division by zero returns the largest magnitude with the
// numerator's sign.  Used by the double pendulum solver for the divisions
// by d1 and d2 in the paper's Eqs. (9) and (10).
//
// Timing: start (one-clock pulse, ignored while busy) latches n and d; done
// pulses W+FRAC+1 clocks later with q valid, held until the next start.
module seq_div #(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 20
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic signed [W-1:0] n,
  input  logic signed [W-1:0] d,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] q
);

  localparam int unsigned DW = W + FRAC;           // scaled dividend width
  localparam int unsigned CW = $clog2(DW + 1);
  localparam logic [DW-1:0] QMAX = DW'({1'b0, {(W-1){1'b1}}});

  logic [DW-1:0] dividend;   // shifts out MSB first, quotient shifts in
  logic [W-1:0]  rem;        // partial remainder, below dmag
  logic [W-1:0]  dmag;
  logic          qneg;
  logic          dzero;
  logic [CW-1:0] cnt;

  logic [W:0]    rem_shift;
  logic [W:0]    rem_sub;
  always_comb begin
    rem_shift = {rem, dividend[DW-1]};
    rem_sub   = rem_shift - {1'b0, dmag};
  end

  logic [W-1:0] nmag_in, dmag_in;
  assign nmag_in = n[W-1] ? W'(-n) : W'(n);
  assign dmag_in = d[W-1] ? W'(-d) : W'(d);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      dividend <= '0;
      rem      <= '0;
      dmag     <= '0;
      qneg     <= 1'b0;
      dzero    <= 1'b0;
      cnt      <= '0;
      q        <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          dividend <= {nmag_in, {FRAC{1'b0}}};
          rem      <= '0;
          dmag     <= dmag_in;
          qneg     <= n[W-1] ^ d[W-1];
          dzero    <= (d == '0);
          cnt      <= '0;
        end
      end else if (cnt == CW'(DW)) begin
        // dividend now holds the unsigned quotient
        busy <= 1'b0;
        done <= 1'b1;
        if (dzero || dividend > QMAX)
          q <= qneg ? -$signed(W'(QMAX)) : $signed(W'(QMAX));
        else
          q <= qneg ? -$signed(dividend[W-1:0]) : $signed(dividend[W-1:0]);
      end else begin
        if (!rem_sub[W]) begin
          rem      <= rem_sub[W-1:0];
          dividend <= {dividend[DW-2:0], 1'b1};
        end else begin
          rem      <= rem_shift[W-1:0];
          dividend <= {dividend[DW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
