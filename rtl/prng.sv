// prng -- pseudo-random generator supplying the secret S that the fuzzy
// extractor binds to the PUF at enrollment.
//
// The generator is Marsaglia's xorshift128 (four 32-bit state words, one
// 32-bit output per clock).  It is seeded with PUF noise: every SRAM start-up
// word presented on `absorb` is XORed into the newest state word and the
// generator is stepped, so the few cells that settle differently on each power-up
// make every enrollment's S different.  `gen` then produces KEY_BITS bits, one
// 32-bit word per cycle, least significant word first.
//
// The paper asks only for a PRNG seeded by a true random source, suggesting the
// PUF noise; the choice of xorshift128 (simple, not cryptographically strong: a
// production device would use a cryptographic DRBG) and of the absorb scheme is
// this design's own.
//
// Interface: `absorb` with `seed_word` mixes one word per cycle.  A `gen`
// pulse (while idle) starts key generation; `key_valid` pulses KEY_BITS/32+1
// cycles later with `key` valid; `key` holds until the next gen.
module prng #(
  parameter int KEY_BITS = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                absorb,
  input  logic [31:0]         seed_word,
  input  logic                gen,
  output logic                busy,
  output logic                key_valid,
  output logic [KEY_BITS-1:0] key
);
  localparam int NW = KEY_BITS / 32;

  logic [31:0] x, y, z, w;
  logic [31:0] t, w_in, w_next;
  logic [$clog2(NW+1)-1:0] cnt;

  always_comb begin
    w_in   = absorb ? (w ^ seed_word) : w;
    t      = x ^ (x << 11);
    w_next = w_in ^ (w_in >> 19) ^ (t ^ (t >> 8));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= 32'd123456789;
      y <= 32'd362436069;
      z <= 32'd521288629;
      w <= 32'd88675123;
      busy      <= 1'b0;
      key_valid <= 1'b0;
      key       <= '0;
      cnt       <= '0;
    end else begin
      key_valid <= 1'b0;
      if (absorb || busy) begin
        x <= y;
        y <= z;
        z <= w_in;
        w <= w_next;
      end
      if (busy) begin
        key <= {w_next, key[KEY_BITS-1:32]};
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(NW - 1)) begin
          busy      <= 1'b0;
          key_valid <= 1'b1;
        end
      end else if (gen && !absorb) begin
        busy <= 1'b1;
        cnt  <= '0;
      end
    end
  end

  initial assert (KEY_BITS % 32 == 0) else $error("KEY_BITS must be a multiple of 32");

endmodule
