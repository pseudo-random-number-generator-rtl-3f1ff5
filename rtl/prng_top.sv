// prng_top: portable FPGA random number generator with three generator
// models, sensor entropy input and a decimal serial output.
//
// Three generators share one clock:
//   - multi_lfsr:      four XOR-combined LFSRs, a new word every clock;
//   - logistic_map +   chaotic logistic map iterated in fixed point, four
//     clt_gaussian:    iterates summed into one near-Gaussian sample;
//   - double_pendulum: fixed-point solver of the double pendulum equations,
//                      seeded by its starting angles, masses and lengths.
// gen_sel chooses which one feeds the output and runs; the others are held
// (their enables are low) so that only the chosen model draws dynamic power.
// GEN_MIXED runs all three, XORs their latest samples and emits on each new
// pendulum sample.  Environmental sensor words (sensor_data/sensor_valid)
// are mixed into the state of all three generators.  The paper compares the
// three models and states that its PRNG is fed by several chaotic models
// and sensor entropy; the selector, the gating and the mixed mode are this
// design's reading of that.
//
// The selected stream appears on rnd/rnd_valid.  latency_counter reports the
// clocks between its samples (the paper measures latency by counting clocks).
// A sample that arrives while the printer is idle is written as a decimal
// line (digits, CR, LF) on the UART, 9600 baud 8N1 by default; samples that
// arrive while a line is still being sent are not printed and are counted on
// print_skips (saturating).  print_take marks, together with rnd_valid, the
// samples that the printer takes.
//
// Interface timing: rnd_valid pulses for one clock per sample of the
// selected generator, one clock after the generator's own strobe.  A change
// of gen_sel takes effect two clocks later and restarts the latency count.
// Synchronous active-low reset; the pendulum seed is loaded at reset and on
// dp_seed_load.
module prng_top
  import prng_pkg::*;
#(
  parameter int unsigned CLK_HZ     = 100_000_000,
  parameter int unsigned BAUD       = 9600,
  parameter int unsigned SENS_W     = 16,
  parameter logic [30:0] LFSR_SEED  = 31'h2545_F491,
  parameter logic [31:0] LOGI_R     = 32'd4284229878,   // 3.99 in Q2.30
  parameter logic [31:0] LOGI_X0    = 32'd1349303490,   // 0.3141592
  parameter int unsigned CLT_N      = 4,
  parameter int unsigned DT_SHIFT   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  gen_sel_e          gen_sel,
  input  logic [SENS_W-1:0] sensor_data,
  input  logic              sensor_valid,
  input  logic              dp_seed_load,
  input  dp_seed_t          dp_seed,
  output logic [RND_W-1:0]  rnd,
  output logic              rnd_valid,
  output logic [15:0]       latency,
  output logic              latency_valid,
  output logic              print_take,
  output logic [31:0]       print_skips,
  output logic              uart_txd
);

  localparam int unsigned CLT_W = 32 + $clog2(CLT_N);

  // ---- generators ----------------------------------------------------------
  // Only the selected generator runs (all three in the mixed mode); the
  // others hold their state, as a battery-powered board would want.
  gen_sel_e sel_q;
  logic     en_lfsr, en_logi, en_dp;
  assign en_lfsr = (sel_q == GEN_LFSR)     || (sel_q == GEN_MIXED);
  assign en_logi = (sel_q == GEN_LOGISTIC) || (sel_q == GEN_MIXED);
  assign en_dp   = (sel_q == GEN_PENDULUM) || (sel_q == GEN_MIXED);

  logic [RND_W-1:0] lfsr_rnd, dp_rnd;
  logic             lfsr_valid, dp_valid;

  multi_lfsr #(.OUT_W(RND_W), .SENS_W(SENS_W), .SEED(LFSR_SEED)) u_multi_lfsr (
    .clk, .rst_n, .en(en_lfsr), .sensor_valid, .sensor_data,
    .rnd(lfsr_rnd), .rnd_valid(lfsr_valid));

  logic [31:0]      logi_x;
  logic             logi_x_valid;
  logic [CLT_W-1:0] clt_sum;
  logic             clt_valid;

  logistic_map #(.XW(32), .R(LOGI_R), .X0(LOGI_X0), .INJ_W(SENS_W)) u_logistic_map (
    .clk, .rst_n, .en(en_logi), .inject(sensor_valid), .inject_data(sensor_data),
    .x(logi_x), .x_valid(logi_x_valid));

  clt_gaussian #(.IN_W(32), .N(CLT_N)) u_clt_gaussian (
    .clk, .rst_n, .in(logi_x), .in_valid(logi_x_valid),
    .out(clt_sum), .out_valid(clt_valid));

  logic signed [DP_W-1:0] dp_th1_unused, dp_th2_unused, dp_w1_unused, dp_w2_unused;

  double_pendulum #(.OUT_W(RND_W), .DT_SHIFT(DT_SHIFT), .INJ_W(SENS_W)) u_double_pendulum (
    .clk, .rst_n, .en(en_dp), .inject(sensor_valid), .inject_data(sensor_data),
    .seed_load(dp_seed_load), .seed(dp_seed),
    .rnd(dp_rnd), .rnd_valid(dp_valid),
    .theta1(dp_th1_unused), .theta2(dp_th2_unused),
    .omega1(dp_w1_unused), .omega2(dp_w2_unused));

  // Gaussian sample: the top RND_W bits of the CLT sum.
  logic [RND_W-1:0] logi_rnd;
  assign logi_rnd = clt_sum[CLT_W-1 -: RND_W];

  // ---- selection -----------------------------------------------------------
  logic             sel_changed;
  logic [RND_W-1:0] last_lfsr, last_logi;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q       <= GEN_LFSR;
      sel_changed <= 1'b1;
      last_lfsr   <= '0;
      last_logi   <= '0;
      rnd         <= '0;
      rnd_valid   <= 1'b0;
    end else begin
      sel_q       <= gen_sel;
      sel_changed <= (gen_sel != sel_q);
      if (lfsr_valid) last_lfsr <= lfsr_rnd;
      if (clt_valid)  last_logi <= logi_rnd;
      rnd_valid <= 1'b0;
      unique case (sel_q)
        GEN_LFSR:     if (lfsr_valid) begin rnd <= lfsr_rnd; rnd_valid <= 1'b1; end
        GEN_LOGISTIC: if (clt_valid)  begin rnd <= logi_rnd; rnd_valid <= 1'b1; end
        GEN_PENDULUM: if (dp_valid)   begin rnd <= dp_rnd;   rnd_valid <= 1'b1; end
        GEN_MIXED:    if (dp_valid)   begin
                        rnd       <= dp_rnd ^ last_lfsr ^ last_logi;
                        rnd_valid <= 1'b1;
                      end
        default: ;
      endcase
    end
  end

  // ---- latency measurement -------------------------------------------------
  latency_counter #(.CW(16)) u_latency_counter (
    .clk, .rst_n, .restart(sel_changed), .strobe(rnd_valid),
    .latency, .latency_valid);

  // ---- decimal text over UART ----------------------------------------------
  logic       fmt_ready;
  logic [7:0] byte_data;
  logic       byte_valid, byte_ready;

  dec_formatter #(.W(RND_W)) u_dec_formatter (
    .clk, .rst_n, .in(rnd), .in_valid(rnd_valid), .in_ready(fmt_ready),
    .out(byte_data), .out_valid(byte_valid), .out_ready(byte_ready));

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart_tx (
    .clk, .rst_n, .data(byte_data), .valid(byte_valid), .ready(byte_ready),
    .txd(uart_txd));

  assign print_take = rnd_valid && fmt_ready;

  always_ff @(posedge clk) begin
    if (!rst_n)                                             print_skips <= '0;
    else if (rnd_valid && !fmt_ready && print_skips != '1)  print_skips <= print_skips + 1'b1;
  end

endmodule
