// tb_x25519_core -- self-checking test of the X25519 scalar multiplier.
//
// Expected values are the published RFC 7748 test vectors (section 5.2 single
// iteration vector, and the section 6.1 Diffie-Hellman example: both public
// keys and the shared secret), written as 256-bit integers (the RFC's
// little-endian byte strings read as numbers).  The test also checks the
// latency: every multiplication must take the same number of cycles, within
// the expected range for the 16-cycle multiplier.
module tb_x25519_core;
  import x25519_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start = 1'b0;
  fe_t  k, u, r;
  logic busy, done;
  int checks = 0, failures = 0;
  int first_cycles = -1;

  always #5 clk = ~clk;

  x25519_core dut (.clk, .rst_n, .start, .k, .u, .busy, .done, .r);

  localparam fe_t NINE = 256'd9;

  task automatic run(input fe_t kk, input fe_t uu, input fe_t expect_r, input string name);
    int cyc;
    k = kk; u = uu;
    @(posedge clk); start <= 1'b1;
    @(posedge clk); start <= 1'b0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    checks++;
    if (r !== expect_r) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, r, expect_r);
    end else $display("ok   %s (%0d cycles)", name, cyc);
    checks++;
    if (first_cycles < 0) first_cycles = cyc;
    if (cyc != first_cycles || cyc < 40000 || cyc > 80000) begin
      failures++;
      $display("FAIL %s: latency %0d cycles (first run %0d)", name, cyc, first_cycles);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // RFC 7748 5.2, first vector
    run(256'hc49a44ba44226a50185afcc10a4c1462dd5e46824b15163b9d7c52f06be346a5,
        256'h4c1cabd0a603a9103b35b326ec2466727c5fb124a4c19435db3030586768dbe6,
        256'h5285a2775507b454f7711c4903cfec324f088df24dea948e90c6e99d3755dac3, "rfc7748 5.2");
    // RFC 7748 6.1: Alice public key
    run(256'h2a2cb91da5fb77b12a99c0eb872f4cdf4566b25172c1163c7da518730a6d0777, NINE,
        256'h6a4e9baa8ea9a4ebf41a38260d3abf0d5af73eb4dc7d8b7454a7308909f02085, "alice pk");
    // Bob public key
    run(256'hebe088ff278b2f1cfdb6182629b13b6fe60e80838b7fe1794b8a4a627e08ab5d, NINE,
        256'h4f2b886f147efcad4d67785bc843833f3735e4ecc2615bd3b4c17d7b7ddb9ede, "bob pk");
    // Shared secret from Alice's side
    run(256'h2a2cb91da5fb77b12a99c0eb872f4cdf4566b25172c1163c7da518730a6d0777,
        256'h4f2b886f147efcad4d67785bc843833f3735e4ecc2615bd3b4c17d7b7ddb9ede,
        256'h4217161e3c9bf076339ed147c9217ee0250f3580f43b8e72e12dcea45b9d5d4a, "shared (alice)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
