// tb_sram_puf -- checks the SRAM PUF model: after a power-up the contents equal
// the device's preferred pattern (recomputed here from the same published hash
// definition) except for a noise fraction near NOISE_PERMILLE; a second power-up
// gives a pattern close to but not equal to the first; a device with another
// seed gives an unrelated pattern (about half the bits differ); plain
// writes and reads work.
module tb_sram_puf;
  localparam int WORDS = 180, WIDTH = 32, AW = 8;
  localparam logic [31:0] SEED_A = 32'h5EED_0001, SEED_B = 32'h0BAD_C10E;
  localparam int NOISE = 50;

  logic clk = 0;
  always #5 clk = ~clk;
  logic power_up = 0, en = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata_a, rdata_b;
  int checks = 0, failures = 0;

  sram_puf #(.WORDS(WORDS), .WIDTH(WIDTH), .AW(AW), .DEVICE_SEED(SEED_A), .NOISE_PERMILLE(NOISE))
    dut_a (.clk, .power_up, .en, .we, .addr, .wdata, .rdata(rdata_a));
  sram_puf #(.WORDS(WORDS), .WIDTH(WIDTH), .AW(AW), .DEVICE_SEED(SEED_B), .NOISE_PERMILLE(NOISE))
    dut_b (.clk, .power_up, .en, .we, .addr, .wdata, .rdata(rdata_b));

  function automatic logic pref(logic [31:0] seed, int unsigned pos);
    logic [31:0] h;
    h = seed ^ (pos * 32'h9E3779B9);
    h ^= h >> 16; h *= 32'h85EBCA6B; h ^= h >> 13; h *= 32'hC2B2AE35; h ^= h >> 16;
    return h[0];
  endfunction

  logic [WIDTH-1:0] snap1 [WORDS], snap2 [WORDS], snapb [WORDS];

  task automatic read_all(output logic [WIDTH-1:0] a [WORDS], output logic [WIDTH-1:0] b [WORDS]);
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); en = 1; we = 0; addr = AW'(i);
      @(negedge clk); en = 0;
      a[i] = rdata_a; b[i] = rdata_b;
    end
  endtask

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int n_noise, n_diff, n_devdiff, ones;
    @(negedge clk); power_up = 1; @(negedge clk); power_up = 0;
    read_all(snap1, snapb);
    n_noise = 0; ones = 0; n_devdiff = 0;
    for (int i = 0; i < WORDS; i++)
      for (int b = 0; b < WIDTH; b++) begin
        n_noise   += int'(snap1[i][b] != pref(SEED_A, i*WIDTH+b));
        ones      += int'(snap1[i][b]);
        n_devdiff += int'(snap1[i][b] != snapb[i][b]);
      end
    $display("noisy bits %0d of %0d, ones %0d, differing from other device %0d", n_noise, WORDS*WIDTH, ones, n_devdiff);
    check(n_noise > WORDS*WIDTH*NOISE/1000/2 && n_noise < WORDS*WIDTH*NOISE*2/1000, "noise fraction");
    check(ones > WORDS*WIDTH*45/100 && ones < WORDS*WIDTH*55/100, "bias near 1/2");
    check(n_devdiff > WORDS*WIDTH*40/100 && n_devdiff < WORDS*WIDTH*60/100, "devices unrelated");
    // second power-up: different noise realisation
    @(negedge clk); power_up = 1; @(negedge clk); power_up = 0;
    read_all(snap2, snapb);
    n_diff = 0;
    for (int i = 0; i < WORDS; i++) n_diff += $countones(snap1[i] ^ snap2[i]);
    $display("bits differing between power-ups: %0d", n_diff);
    check(n_diff > 0 && n_diff < WORDS*WIDTH*NOISE*4/1000, "power-up to power-up distance");
    // plain SRAM use
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); en = 1; we = 1; addr = AW'(i*7); wdata = 32'hC0DE_0000 + i;
    end
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); en = 1; we = 0; addr = AW'(i*7);
      @(negedge clk); en = 0;
      check(rdata_a == 32'hC0DE_0000 + i, "write/read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
