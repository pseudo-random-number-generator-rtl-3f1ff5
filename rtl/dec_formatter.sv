// dec_formatter: prints an unsigned binary number as decimal ASCII text,
// one number per line.
//
// The paper's terminal screenshot shows the random numbers as decimal text,
// one per line; how the board produced that text is not described.  Here a
// number taken on the input is converted to BCD by the shift-and-add-3
// ("double dabble") method, one input bit per clock, and then sent as a byte
// stream: its decimal digits without leading zeros (a zero prints as "0"),
// then carriage return and line feed.
//
// Interface: in/in_valid/in_ready takes one number at a time (in_ready is
// high only when idle).  Bytes leave on out/out_valid/out_ready; out_valid
// holds with a stable byte until out_ready is seen.  Conversion takes W
// clocks; each byte then moves as soon as the sink is ready.
module dec_formatter #(
  parameter int unsigned W  = 16,
  localparam int unsigned ND = (W * 30103) / 100000 + 1   // decimal digits
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] in,
  input  logic         in_valid,
  output logic         in_ready,
  output logic [7:0]   out,
  output logic         out_valid,
  input  logic         out_ready
);

  typedef enum logic [1:0] {F_IDLE, F_CONV, F_DIGITS, F_EOL} fstate_e;
  fstate_e st;

  localparam int unsigned CW = $clog2(W + 1);
  localparam int unsigned IW = $clog2(ND + 1);

  logic [4*ND-1:0] bcd;
  logic [W-1:0]    bin;
  logic [CW-1:0]   cnt;
  logic [IW-1:0]   idx;      // digit being sent, counts down
  logic            started;  // a non-zero digit has been sent
  logic            eol_lf;   // 0: CR next, 1: LF next

  // One double-dabble step: add 3 to every digit of 5 or more, then shift.
  logic [4*ND-1:0] bcd_adj;
  always_comb begin
    for (int k = 0; k < ND; k++)
      bcd_adj[4*k +: 4] = (bcd[4*k +: 4] >= 4'd5) ? bcd[4*k +: 4] + 4'd3 : bcd[4*k +: 4];
  end

  logic [3:0] digit;
  assign digit = bcd[4*idx +: 4];

  assign in_ready = (st == F_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= F_IDLE;
      bcd       <= '0;
      bin       <= '0;
      cnt       <= '0;
      idx       <= '0;
      started   <= 1'b0;
      eol_lf    <= 1'b0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_ready) out_valid <= 1'b0;   // byte taken (or none pending)
      unique case (st)
        F_IDLE: if (in_valid) begin
          bin <= in;
          bcd <= '0;
          cnt <= '0;
          st  <= F_CONV;
        end
        F_CONV: begin
          {bcd, bin} <= {bcd_adj, bin} << 1;
          cnt        <= cnt + 1'b1;
          if (cnt == CW'(W - 1)) begin
            idx     <= IW'(ND - 1);
            started <= 1'b0;
            st      <= F_DIGITS;
          end
        end
        F_DIGITS: begin
          if (!out_valid || out_ready) begin
            if (digit != 4'd0 || started || idx == '0) begin
              out       <= 8'h30 + 8'(digit);
              out_valid <= 1'b1;
              started   <= 1'b1;
            end
            if (idx == '0) begin
              eol_lf <= 1'b0;
              st     <= F_EOL;
            end else begin
              idx <= idx - 1'b1;
            end
          end
        end
        F_EOL: begin
          if (!out_valid || out_ready) begin
            out_valid <= 1'b1;
            out       <= eol_lf ? 8'h0A : 8'h0D;
            eol_lf    <= 1'b1;
            if (eol_lf) st <= F_IDLE;
          end
        end
        default: st <= F_IDLE;
      endcase
    end
  end

endmodule
