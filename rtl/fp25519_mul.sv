// fp25519_mul -- digit-serial modular multiplier for GF(2^255 - 19).
//
// Computes r = a * b mod p (partially reduced, r < 2^256) in DIGITS cycles.
// The multiplier b is consumed most-significant digit first, DIGIT_W bits at a
// time (Horner's rule):  acc <- acc * 2^DIGIT_W + a * digit, and after every
// step the bits of acc at and above position 255 are folded back with weight
// 19.  With the default 16-bit digit one multiplication takes 16 cycles, the
// multiplier configuration the paper selects for its scalar-multiplication
// core to save area; the digit-serial Horner structure is this design's own.
//
// Interface: pulse `start` with a and b valid (they are captured); `done` pulses
// for one cycle when r is valid.  r holds until the next start.  A start while
// busy is ignored.
module fp25519_mul
  import x25519_pkg::*;
#(
  parameter int DIGIT_W = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fe_t  a,
  input  fe_t  b,
  output logic busy,
  output logic done,
  output fe_t  r
);
  localparam int DIGITS = 256 / DIGIT_W;
  localparam int TW     = 256 + DIGIT_W + 1;   // width of one Horner step

  fe_t a_q, b_q, acc;
  logic [$clog2(DIGITS+1)-1:0] cnt;

  logic [TW-1:0]      step;
  logic [TW-255-1:0]  hi;
  fe_t                acc_next;

  always_comb begin
    step     = {acc, {DIGIT_W{1'b0}}} + TW'(a_q) * TW'(b_q[255 -: DIGIT_W]);
    hi       = step[TW-1:255];
    acc_next = {1'b0, step[254:0]} + 256'(hi) * 256'd19;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
      acc  <= '0;
      a_q  <= '0;
      b_q  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          a_q  <= a;
          b_q  <= b;
          acc  <= '0;
          cnt  <= '0;
        end
      end else begin
        acc <= acc_next;
        b_q <= b_q << DIGIT_W;
        cnt <= cnt + 1'b1;
        if (cnt == ($bits(cnt))'(DIGITS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign r = acc;

  initial assert (256 % DIGIT_W == 0) else $error("DIGIT_W must divide 256");

endmodule
