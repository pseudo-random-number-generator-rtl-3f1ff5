// tb_prng_top_full: prng_top at its default parameters (100 MHz clock,
// 9600 baud), one complete operation per generator model.
//
// For each of the four models in turn the testbench selects it and waits
// until a line holding a sample of that model has been printed.  A decoder
// reads every line from the serial pin at 10417 clocks per bit and checks it
// against the samples the printer took, in order.  It also checks that the line takes the
// time the baud rate implies (digits + CR + LF, 10 bit times each).
module tb_prng_top_full;
  import prng_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam int DIV = 10417;   // 100 MHz / 9600 baud, rounded

  logic        rst_n, sensor_valid, seed_load;
  gen_sel_e    gen_sel;
  logic [15:0] sensor_data, rnd, lat;
  logic [31:0] skips;
  logic        take;
  logic        rv, lv, txd;

  prng_top dut (
    .clk, .rst_n, .gen_sel, .sensor_data, .sensor_valid, .dp_seed_load(seed_load),
    .dp_seed(DP_SEED_DEFAULT), .rnd, .rnd_valid(rv), .latency(lat), .latency_valid(lv),
    .print_take(take), .print_skips(skips), .uart_txd(txd));

  initial begin
    repeat (16 * 8 * 10 * DIV) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) cycle++;

  // Samples the printer took, tagged with the model that produced them.
  typedef struct { int value; int model; } sample_t;
  sample_t   taken_q[$];
  int        settle = 0;           // clocks since gen_sel last changed
  gen_sel_e  sel_prev;

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      if (rv && take)
        // the selector acts two clocks after gen_sel changes
        taken_q.push_back('{int'(rnd), (settle >= 3) ? int'(gen_sel) : -1});
      settle = (gen_sel == sel_prev) ? settle + 1 : 0;
      sel_prev = gen_sel;
    end
  end

  // Serial decoder: every line must be the oldest sample not yet printed.
  int last_line_model = -1;
  int n_lines = 0;
  initial begin
    byte unsigned b;
    string line;
    int t_start, nbytes;
    @(posedge rst_n);
    forever begin
      line = "";
      nbytes = 0;
      do begin
        @(negedge txd);
        if (nbytes == 0) t_start = cycle;
        repeat (DIV / 2) @(posedge clk);
        #1 check(txd == 1'b0, "start bit");
        for (int i = 0; i < 8; i++) begin
          repeat (DIV) @(posedge clk);
          #1 b[i] = txd;
        end
        repeat (DIV) @(posedge clk);
        #1 check(txd == 1'b1, "stop bit");
        nbytes++;
        if (b != 8'h0D && b != 8'h0A) line = {line, string'(b)};
      end while (b != 8'h0A);
      check(taken_q.size() > 0 && line == $sformatf("%0d", taken_q[0].value),
            $sformatf("line \"%s\" expected %0d", line, taken_q.size() ? taken_q[0].value : -1));
      check(nbytes == line.len() + 2, "CR LF ends the line");
      // bytes leave back to back: start of first start bit to middle of last stop bit
      check(cycle - t_start >= (10 * nbytes - 1) * DIV && cycle - t_start <= 10 * nbytes * DIV,
            $sformatf("line took %0d clocks for %0d bytes", cycle - t_start, nbytes));
      if (taken_q.size() > 0) begin
        last_line_model = taken_q[0].model;
        void'(taken_q.pop_front());
      end
      n_lines++;
      $display("line %0d: %s (model %0d, latency %0d clocks)", n_lines, line, last_line_model, lat);
    end
  end

  task automatic one_line(gen_sel_e m);
    @(negedge clk);
    gen_sel = m;
    wait (last_line_model == int'(m));
    check(1'b1, "line printed");
  endtask

  initial begin
    rst_n = 1'b0; sensor_valid = 1'b0; sensor_data = '0; seed_load = 1'b0;
    gen_sel = GEN_LFSR;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    one_line(GEN_LFSR);
    one_line(GEN_LOGISTIC);
    one_line(GEN_PENDULUM);
    one_line(GEN_MIXED);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
