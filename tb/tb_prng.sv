// tb_prng -- checks the PRNG against an independent xorshift128 model:
// seed absorption, the generated key words and their order, the latency
// (key_valid KEY_BITS/32+1 cycles after gen), and that different seed data
// gives a different key while identical seed data repeats the key.
module tb_prng;
  import x25519_ref_pkg::*;
  localparam int KEY_BITS = 256, NW = KEY_BITS / 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic absorb = 0, gen = 0, busy, key_valid;
  logic [31:0] seed_word = '0;
  logic [KEY_BITS-1:0] key, key_first;
  int checks = 0, failures = 0;

  prng #(.KEY_BITS(KEY_BITS)) dut (.clk, .rst_n, .absorb, .seed_word, .gen, .busy, .key_valid, .key);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // reset, absorb n words seed0, seed0+step, ..., generate, compare with model
  task automatic session(input logic [31:0] seed0, input logic [31:0] step, input int n,
                         output logic [KEY_BITS-1:0] got);
    xs128_t s;
    logic [KEY_BITS-1:0] expect_key;
    int cyc;
    rst_n = 0; @(negedge clk); rst_n = 1;
    s = xs_init();
    for (int i = 0; i < n; i++) begin
      @(negedge clk); absorb = 1; seed_word = seed0 + step * i;
      s = xs_step(s, seed0 + step * i);
    end
    @(negedge clk); absorb = 0; gen = 1;
    @(negedge clk); gen = 0;
    cyc = 1;
    while (!key_valid) begin @(negedge clk); cyc++; end
    for (int i = 0; i < NW; i++) begin
      s = xs_step(s, 32'd0);
      expect_key[i*32 +: 32] = s.w;
    end
    check(key == expect_key, "key matches xorshift128 model");
    check(cyc == NW + 1, $sformatf("latency %0d cycles", cyc));
    got = key;
  endtask

  initial begin
    logic [KEY_BITS-1:0] k2, k3;
    session(32'h1234_5678, 32'h0101_0101, 180, key_first);
    session(32'h1234_5679, 32'h0101_0101, 180, k2);   // one seed bit different
    check(k2 != key_first, "seed change changes key");
    check($countones(k2 ^ key_first) > 64, "seed change spreads");
    session(32'h1234_5678, 32'h0101_0101, 180, k3);
    check(k3 == key_first, "same seed repeats key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
