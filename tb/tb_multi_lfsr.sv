// tb_multi_lfsr: self-checking testbench for multi_lfsr.
//
// A reference model keeps the four registers as integers, advances them with
// the trinomials x^15+x+1, x^17+x^3+1, x^23+x^5+1, x^31+x^3+1 by 15 single
// steps per clock and mixes in sensor words the same way the design
// specifies.  Every clock the output word is compared with the model's
// {s17[16], s15} xor s17[15:0] xor s23[15:0] xor s31[15:0].
// It also checks the one-clock latency (a new word every clock while en is
// high, none while it is low) and that sensor words change the stream.
module tb_multi_lfsr;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  localparam logic [30:0] SEED = 31'h2545_F491;

  logic        rst_n, en, sv;
  logic [15:0] sd, rnd;
  logic        rnd_valid;

  multi_lfsr dut (.clk, .rst_n, .en, .sensor_valid(sv), .sensor_data(sd), .rnd, .rnd_valid);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint unsigned m[4];
  int unsigned     len[4] = '{15, 17, 23, 31};
  int unsigned     tap[4] = '{1, 3, 5, 3};

  function automatic longint unsigned step(longint unsigned s, int unsigned n, int unsigned k);
    longint unsigned fb = ((s >> (n - 1)) ^ (s >> (k - 1))) & 1;
    return ((s << 1) | fb) & ((64'd1 << n) - 1);
  endfunction

  function automatic longint unsigned spread(logic [15:0] d);
    longint unsigned r = 0;
    for (int i = 0; i < 31; i++) r |= longint'(d[i % 16]) << i;
    return r;
  endfunction

  function automatic longint unsigned mix(longint unsigned s, longint unsigned v, int unsigned n);
    longint unsigned r = (s ^ v) & ((64'd1 << n) - 1);
    return (r == 0) ? 1 : r;
  endfunction

  logic [15:0] expect_rnd, no_sensor_rnd;
  longint unsigned sp;
  int          nvalid;

  initial begin
    rst_n = 1'b0; en = 1'b0; sv = 1'b0; sd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    m[0] = SEED[14:0]; m[1] = SEED[30:14]; m[2] = SEED[22:0] ^ 23'h5E_3C1B; m[3] = SEED ^ 31'h1357_9BDF;
    @(negedge clk);
    en = 1'b1;
    for (int c = 0; c < 3000; c++) begin
      // the registered output taken at this edge uses the current states
      expect_rnd = 16'(m[0] | (((m[1] >> 16) & 1) << 15)) ^ 16'(m[1]) ^ 16'(m[2]) ^ 16'(m[3]);
      sv = (c % 97) == 50;
      sd = 16'($urandom);
      @(posedge clk);
      #1;
      check(rnd_valid, $sformatf("rnd_valid at clock %0d", c));
      check(rnd == expect_rnd, $sformatf("rnd %h expected %h at clock %0d", rnd, expect_rnd, c));
      for (int i = 0; i < 4; i++) repeat (15) m[i] = step(m[i], len[i], tap[i]);
      if (sv) begin
        sp = spread(sd);
        m[0] = mix(m[0], sp & 64'h7FFF, 15);
        m[1] = mix(m[1], (sp & 64'h1FFFF) ^ 64'h1_5A5A, 17);
        m[2] = mix(m[2], (((sp & 64'hFF) << 15) | ((sp >> 16) & 64'h7FFF)), 23);
        m[3] = mix(m[3], (((sp & 64'hFFFF) << 15) | ((sp >> 16) & 64'h7FFF)), 31);
      end
      @(negedge clk);
    end
    // en low: no new words
    sv = 1'b0;
    en = 1'b0;
    nvalid = 0;
    repeat (5) begin @(posedge clk); #1; if (rnd_valid) nvalid++; end
    check(nvalid <= 1, "rnd_valid stops when en is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
