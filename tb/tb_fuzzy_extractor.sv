// tb_fuzzy_extractor -- checks the code-offset fuzzy extractor with a
// testbench-held response memory (one-cycle read latency, like the SRAM).
//
//  1. Enrollment of a random key: every helper-data word must equal
//     R xor (each key bit repeated REP times), bit j of the response belonging to
//     key bit j/REP; the output stream is randomly stalled.
//  2. Reconstruction from a response with injected errors, up to (REP-1)/2 in
//     a group, fed with random input gaps: the key must come back exactly and
//     n_corrected must equal the number of injected errors.
//  3. One group with (REP+1)/2 errors: exactly that key bit must come out wrong.
//  4. Cycle count of one operation is within the expected bound.
module tb_fuzzy_extractor;
  localparam int KEY_BITS = 256, REP = 21, WIDTH = 32, AW = 8;
  localparam int HD_BITS = KEY_BITS * REP, HD_WORDS = HD_BITS / WIDTH;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic enroll = 0, reconstruct = 0, busy, done;
  logic [KEY_BITS-1:0] key_in = '0, key_out;
  logic [15:0] n_corrected;
  logic sram_en;
  logic [AW-1:0] sram_addr;
  logic [WIDTH-1:0] sram_rdata;
  logic hd_out_valid, hd_out_ready = 0, hd_in_valid = 0, hd_in_ready;
  logic [WIDTH-1:0] hd_out_data, hd_in_data = '0;

  logic [WIDTH-1:0] resp [HD_WORDS];
  logic [WIDTH-1:0] hd   [HD_WORDS];
  int checks = 0, failures = 0;

  always_ff @(posedge clk) if (sram_en) sram_rdata <= resp[sram_addr];

  fuzzy_extractor #(.KEY_BITS(KEY_BITS), .REP(REP), .WIDTH(WIDTH), .AW(AW)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic do_enroll(output int cyc);
    int n;
    @(negedge clk); enroll = 1;
    @(negedge clk); enroll = 0;
    n = 0; cyc = 1;
    while (!done) begin
      hd_out_ready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (hd_out_valid && hd_out_ready) begin hd[n] = hd_out_data; n++; end
      @(negedge clk); cyc++;
    end
    hd_out_ready = 0;
    check(n == HD_WORDS, $sformatf("enroll produced %0d HD words", n));
  endtask

  task automatic do_reconstruct(output int cyc);
    int n;
    @(negedge clk); reconstruct = 1;
    @(negedge clk); reconstruct = 0;
    n = 0; cyc = 1;
    while (!done) begin
      hd_in_valid = (n < HD_WORDS) && ($urandom_range(3) != 0);
      hd_in_data  = hd[n % HD_WORDS];
      @(posedge clk);
      if (hd_in_valid && hd_in_ready) n++;
      @(negedge clk); cyc++;
    end
    hd_in_valid = 0;
    check(n == HD_WORDS, $sformatf("reconstruct consumed %0d HD words", n));
  endtask

  initial begin
    logic [KEY_BITS-1:0] key;
    logic [WIDTH-1:0] resp0 [HD_WORDS];
    int cyc, injected, bad_grp, hd_bad;
    for (int i = 0; i < HD_WORDS; i++) begin resp[i] = $urandom; resp0[i] = resp[i]; end
    for (int i = 0; i < KEY_BITS / 32; i++) key[i*32 +: 32] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;

    // 1. enrollment
    key_in = key;
    do_enroll(cyc);
    hd_bad = 0;
    for (int j = 0; j < HD_BITS; j++)
      hd_bad += int'(hd[j / WIDTH][j % WIDTH] != (resp0[j / WIDTH][j % WIDTH] ^ key[j / REP]));
    check(hd_bad == 0, $sformatf("HD = R xor Encode(S): %0d wrong bits", hd_bad));
    check(cyc < HD_WORDS * (WIDTH + 8), $sformatf("enroll latency %0d", cyc));
    check(key_out == '0, "enrolled key cleared after enrollment");
    key_in = '0;

    // 2. reconstruction with correctable noise
    injected = 0;
    for (int g = 0; g < KEY_BITS; g++) begin
      int nflip;
      nflip = (g == 7) ? (REP - 1) / 2 : $urandom_range(3);
      for (int f = 0; f < nflip; f++) begin
        int j;
        j = g * REP + f * 2;        // distinct positions within the group
        resp[j / WIDTH][j % WIDTH] ^= 1'b1;
        injected++;
      end
    end
    do_reconstruct(cyc);
    check(key_out == key, "key reconstructed through noise");
    check(n_corrected == 16'(injected), $sformatf("corrected %0d, injected %0d", n_corrected, injected));
    check(cyc < HD_WORDS * (WIDTH + 8), $sformatf("reconstruct latency %0d", cyc));

    // 3. one group beyond the code's capacity
    for (int i = 0; i < HD_WORDS; i++) resp[i] = resp0[i];
    bad_grp = 100;
    for (int f = 0; f < (REP + 1) / 2; f++) begin
      int j;
      j = bad_grp * REP + f;
      resp[j / WIDTH][j % WIDTH] ^= 1'b1;
    end
    do_reconstruct(cyc);
    check((key_out ^ key) == (KEY_BITS'(1) << bad_grp), "only the overloaded group decodes wrongly");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
