// x25519_core -- elliptic-curve scalar multiplication unit (X25519, Curve25519).
//
// Computes r = X25519(k, u): the u-coordinate of k*P for the point P with
// u-coordinate u, as specified in RFC 7748 (scalar clamping, top bit of u
// ignored, result in canonical form).  With u = 9 it yields the public key of
// secret k (key generation, "DH KGen"); with u = the peer's public key it
// yields the Diffie-Hellman shared secret w.
//
// How it works: a small field processor.  Sixteen 256-bit registers hold the
// ladder state (x1, x2, z2, x3, z3), temporaries and the constant a24.  A
// one-cycle adder/subtractor and the digit-serial multiplier fp25519_mul are
// driven by an 18-instruction microprogram (x25519_pkg::LADDER_UCODE) once per
// scalar bit, 255 times, each step preceded by the constant-time conditional
// swap.  The projective result x2/z2 is then converted to affine form by
// inversion z2^(p-2), left-to-right square-and-multiply over the fixed
// exponent, and a last multiplication and canonical reduction.
//
// Timing: roughly 57,000 clock cycles per scalar multiplication with the
// default 16-cycle multiplier, independent of the scalar's value (the
// operation sequence depends only on constants).
//
// Interface: pulse `start` with k and u valid (captured).  `busy` is high
// until `done` pulses for one cycle with r valid; r holds until the next start.
//
// From the paper: the operation (Curve25519 scalar multiplication for ECDH)
// and the 16-cycle multiplier setting of the core it used.  That core is an
// instruction-set processor whose program is not given; the microprogrammed
// register-file structure here is this design's own.
module x25519_core
  import x25519_pkg::*;
#(
  parameter int DIGIT_W = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fe_t  k,
  input  fe_t  u,
  output logic busy,
  output logic done,
  output fe_t  r
);

  typedef enum logic [2:0] {S_IDLE, S_SWAP, S_ISSUE, S_WAIT, S_FSWAP, S_OUT} state_e;
  typedef enum logic [1:0] {PH_LADDER, PH_INV, PH_FINAL} phase_e;

  state_e state;
  phase_e phase;

  fe_t rf [16];
  fe_t k_q;
  logic [7:0] bit_idx;
  logic [7:0] inv_idx;
  logic       inv_sub;     // 0: squaring step, 1: multiply-by-z2 step
  logic       swap_q;
  logic [4:0] pc;

  // Current instruction.
  uins_t ins;
  always_comb begin
    unique case (phase)
      PH_LADDER: ins = LADDER_UCODE[pc];
      PH_INV:    ins = inv_sub ? uins_t'{FOP_MUL, R_A, R_A, R_Z2}
                               : uins_t'{FOP_MUL, R_A, R_A, R_A};
      default:   ins = uins_t'{FOP_MUL, R_X2, R_X2, R_A};
    endcase
  end

  fe_t opa, opb, addsub;
  assign opa    = rf[ins.sa];
  assign opb    = rf[ins.sb];
  assign addsub = (ins.op == FOP_SUB) ? fe_sub(opa, opb) : fe_add(opa, opb);

  logic mul_start, mul_busy, mul_done;
  fe_t  mul_r;
  assign mul_start = (state == S_ISSUE) && (ins.op == FOP_MUL);

  fp25519_mul #(.DIGIT_W(DIGIT_W)) u_mul (
    .clk, .rst_n,
    .start (mul_start),
    .a     (opa),
    .b     (opb),
    .busy  (mul_busy),
    .done  (mul_done),
    .r     (mul_r)
  );

  // Sequencing after the current instruction completes.
  state_e     adv_state;
  phase_e     adv_phase;
  logic [4:0] adv_pc;
  logic [7:0] adv_bit, adv_inv;
  logic       adv_sub;
  always_comb begin
    adv_state = S_ISSUE;
    adv_phase = phase;
    adv_pc    = pc;
    adv_bit   = bit_idx;
    adv_inv   = inv_idx;
    adv_sub   = inv_sub;
    unique case (phase)
      PH_LADDER: begin
        if (pc == 5'(LADDER_LEN - 1)) begin
          adv_pc = '0;
          if (bit_idx == 8'd0) adv_state = S_FSWAP;
          else begin
            adv_bit   = bit_idx - 8'd1;
            adv_state = S_SWAP;
          end
        end else begin
          adv_pc = pc + 5'd1;
        end
      end
      PH_INV: begin
        if (!inv_sub && P_MINUS_2[inv_idx]) begin
          adv_sub = 1'b1;
        end else if (inv_idx == 8'd0) begin
          adv_phase = PH_FINAL;
        end else begin
          adv_inv = inv_idx - 8'd1;
          adv_sub = 1'b0;
        end
      end
      default: adv_state = S_OUT;
    endcase
  end

  logic complete;
  assign complete = (state == S_ISSUE && ins.op != FOP_MUL) || (state == S_WAIT && mul_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      phase   <= PH_LADDER;
      busy    <= 1'b0;
      done    <= 1'b0;
      r       <= '0;
      k_q     <= '0;
      bit_idx <= '0;
      inv_idx <= '0;
      inv_sub <= 1'b0;
      swap_q  <= 1'b0;
      pc      <= '0;
      for (int i = 0; i < 16; i++) rf[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rf[R_X1]  <= {1'b0, u[254:0]};
          rf[R_X2]  <= 256'd1;
          rf[R_Z2]  <= 256'd0;
          rf[R_X3]  <= {1'b0, u[254:0]};
          rf[R_Z3]  <= 256'd1;
          rf[R_K24] <= A24;
          k_q       <= clamp_scalar(k);
          bit_idx   <= 8'd254;
          swap_q    <= 1'b0;
          pc        <= '0;
          phase     <= PH_LADDER;
          busy      <= 1'b1;
          state     <= S_SWAP;
        end
        S_SWAP: begin
          if (swap_q ^ k_q[bit_idx]) begin
            rf[R_X2] <= rf[R_X3];
            rf[R_X3] <= rf[R_X2];
            rf[R_Z2] <= rf[R_Z3];
            rf[R_Z3] <= rf[R_Z2];
          end
          swap_q <= k_q[bit_idx];
          state  <= S_ISSUE;
        end
        S_ISSUE, S_WAIT: begin
          if (state == S_ISSUE && ins.op == FOP_MUL) state <= S_WAIT;
          if (complete) begin
            rf[ins.dst] <= (ins.op == FOP_MUL) ? mul_r : addsub;
            state   <= adv_state;
            phase   <= adv_phase;
            pc      <= adv_pc;
            bit_idx <= adv_bit;
            inv_idx <= adv_inv;
            inv_sub <= adv_sub;
          end
        end
        S_FSWAP: begin
          // Final conditional swap; the inversion accumulator starts at z2
          // because the top exponent bit (254) of p-2 is one.
          if (swap_q) begin
            rf[R_X2] <= rf[R_X3];
            rf[R_X3] <= rf[R_X2];
            rf[R_Z2] <= rf[R_Z3];
            rf[R_Z3] <= rf[R_Z2];
            rf[R_A]  <= rf[R_Z3];
          end else begin
            rf[R_A]  <= rf[R_Z2];
          end
          phase   <= PH_INV;
          inv_idx <= 8'd253;
          inv_sub <= 1'b0;
          state   <= S_ISSUE;
        end
        S_OUT: begin
          r     <= fe_freeze(rf[R_X2]);
          done  <= 1'b1;
          busy  <= 1'b0;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The multiplier is only started from S_ISSUE and the core waits for it.
  assert property (@(posedge clk) disable iff (!rst_n) mul_start |-> !mul_busy);

endmodule
