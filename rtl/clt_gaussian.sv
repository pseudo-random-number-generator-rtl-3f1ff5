// clt_gaussian: Central Limit Theorem shaping of a stream of samples.
//
// The paper refines the logistic-map output towards a Gaussian distribution
// with a CLT transformation; it does not say how many samples are summed.
// This block adds N consecutive input samples (non-overlapping groups) and
// emits their sum, which by the CLT tends to a normal distribution with mean
// N*mean(in) and variance N*var(in).  N = 4 is this design's choice: with the
// two-clock logistic iteration it gives one shaped sample every 8 clocks,
// inside the 5-10 clock latency the paper reports for its logistic-map PRNG.
//
// Interface: in/in_valid is a stream; out/out_valid pulses one clock after
// the N-th sample of a group is accepted.  out is IN_W + log2(N) bits wide,
// the full unnormalised sum.  Synchronous active-low reset clears the group.
module clt_gaussian #(
  parameter int unsigned IN_W = 32,
  parameter int unsigned N    = 4,
  localparam int unsigned CW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned OUT_W = IN_W + $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IN_W-1:0]  in,
  input  logic             in_valid,
  output logic [OUT_W-1:0] out,
  output logic             out_valid
);

  logic [OUT_W-1:0] acc;
  logic [CW-1:0]    cnt;
  logic [OUT_W-1:0] sum;

  assign sum = acc + OUT_W'(in);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt == CW'(N - 1)) begin
          out       <= sum;
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= sum;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  initial begin
    assert (N >= 2 && (N & (N - 1)) == 0) else $error("clt_gaussian: N must be a power of two, at least 2");
  end

endmodule
