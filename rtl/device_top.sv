// device_top -- security subsystem of a constrained IoT device: PUF-based key
// storage plus elliptic-curve Diffie-Hellman, the device side of a public-key
// authentication protocol.
//
// The device never stores its private key.  At enrollment a fresh 256-bit
// secret x is drawn, bound to the chip's SRAM start-up pattern through public
// helper data HD, and only ID, HD and the public key PK_ID = x * G leave the
// chip (a trusted party signs them into a certificate).  In the field the
// device gets HD back together with the server's public key, re-derives x from
// the noisy SRAM pattern and computes the shared secret w = x * PK_server.  A
// chip with a different SRAM (a clone or a counterfeit) derives a different x
// and so a different w, which the server detects.
//
// Blocks: control_unit (sequencer and outside interface), the PUF system made
// of sram_puf (behavioural model of the uninitialised SRAM), prng and
// fuzzy_extractor, x25519_core (scalar multiplication on Curve25519) and nvm
// (behavioural model of the non-volatile memory that keeps the trusted third
// party's public key PK_TTP and the device certificate Cert_ID, each
// write-protected after it is stored).  With the certificate on the chip the
// device can also answer a session request with it and take HD from it.
// The certificate verifier the protocol needs on the device is external; its
// handshake (vf_req / vf_done / vf_ok) and the stored key it must use
// (vf_pk_ttp) are ports.  puf_power_up stands for
// the SRAM's power-up and must be pulsed once before the first command.
//
// Interface and timing: see control_unit for the commands and word order.
// Enrollment takes about 64,000 cycles and a key agreement about 63,000, most
// of it the 57,325-cycle scalar multiplication.
module device_top
  import device_pkg::*;
#(
  parameter logic [31:0] PUF_SEED       = 32'h5EED_0001,
  parameter int          NOISE_PERMILLE = 50,
  parameter int          MUL_DIGIT_W    = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                puf_power_up,
  input  logic [ID_BITS-1:0]  device_id,
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_e                cmd,
  output status_e             status,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [WORD_W-1:0]   in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [WORD_W-1:0]   out_data,
  output logic                out_last,
  output logic                vf_req,
  input  logic                vf_done,
  input  logic                vf_ok,
  output logic [KEY_BITS-1:0] vf_pk_ttp,        // stored PK_TTP, for the verifier
  output logic [15:0]         puf_n_corrected   // bits corrected by the last reconstruction
);
  localparam int AW = $clog2(SRAM_WORDS);

  logic              sram_en;
  logic [AW-1:0]     sram_addr;
  logic [WORD_W-1:0] sram_rdata;

  logic                prng_absorb, prng_gen, prng_busy, prng_key_valid;
  logic [WORD_W-1:0]   prng_seed_word;
  logic [KEY_BITS-1:0] prng_key;

  logic                fe_enroll, fe_reconstruct, fe_busy, fe_done;
  logic [KEY_BITS-1:0] fe_key_in, fe_key_out;
  logic                fe_sram_en;
  logic [AW-1:0]       fe_sram_addr;
  logic                fe_hd_out_valid, fe_hd_out_ready, fe_hd_in_valid, fe_hd_in_ready;
  logic [WORD_W-1:0]   fe_hd_out_data, fe_hd_in_data;

  logic                nvm_en, nvm_we;
  logic [NVM_AW-1:0]   nvm_addr;
  logic [WORD_W-1:0]   nvm_wdata, nvm_rdata;

  logic                ecc_start, ecc_busy, ecc_done;
  logic [KEY_BITS-1:0] ecc_k, ecc_u, ecc_r;

  sram_puf #(
    .WORDS(SRAM_WORDS), .WIDTH(WORD_W), .AW(AW),
    .DEVICE_SEED(PUF_SEED), .NOISE_PERMILLE(NOISE_PERMILLE)
  ) u_sram (
    .clk, .power_up(puf_power_up),
    .en(sram_en), .we(1'b0), .addr(sram_addr), .wdata('0), .rdata(sram_rdata)
  );

  nvm #(.WORDS(NVM_WORDS), .WIDTH(WORD_W), .AW(NVM_AW)) u_nvm (
    .clk, .en(nvm_en), .we(nvm_we), .addr(nvm_addr), .wdata(nvm_wdata), .rdata(nvm_rdata)
  );

  prng #(.KEY_BITS(KEY_BITS)) u_prng (
    .clk, .rst_n,
    .absorb(prng_absorb), .seed_word(prng_seed_word), .gen(prng_gen),
    .busy(prng_busy), .key_valid(prng_key_valid), .key(prng_key)
  );

  fuzzy_extractor #(.KEY_BITS(KEY_BITS), .REP(REP), .WIDTH(WORD_W), .AW(AW)) u_fe (
    .clk, .rst_n,
    .enroll(fe_enroll), .reconstruct(fe_reconstruct), .key_in(fe_key_in),
    .busy(fe_busy), .done(fe_done), .key_out(fe_key_out), .n_corrected(puf_n_corrected),
    .sram_en(fe_sram_en), .sram_addr(fe_sram_addr), .sram_rdata(sram_rdata),
    .hd_out_valid(fe_hd_out_valid), .hd_out_ready(fe_hd_out_ready), .hd_out_data(fe_hd_out_data),
    .hd_in_valid(fe_hd_in_valid), .hd_in_ready(fe_hd_in_ready), .hd_in_data(fe_hd_in_data)
  );

  x25519_core #(.DIGIT_W(MUL_DIGIT_W)) u_ecc (
    .clk, .rst_n,
    .start(ecc_start), .k(ecc_k), .u(ecc_u),
    .busy(ecc_busy), .done(ecc_done), .r(ecc_r)
  );

  control_unit #(.SRAM_AW(AW)) u_ctrl (
    .clk, .rst_n, .device_id,
    .cmd_valid, .cmd_ready, .cmd, .status,
    .in_valid, .in_ready, .in_data,
    .out_valid, .out_ready, .out_data, .out_last,
    .vf_req, .vf_done, .vf_ok, .vf_pk_ttp,
    .nvm_en, .nvm_we, .nvm_addr, .nvm_wdata, .nvm_rdata,
    .sram_en, .sram_addr, .sram_rdata,
    .prng_absorb, .prng_seed_word, .prng_gen, .prng_key_valid, .prng_key,
    .fe_enroll, .fe_reconstruct, .fe_key_in, .fe_done, .fe_key_out,
    .fe_sram_en, .fe_sram_addr,
    .fe_hd_out_valid, .fe_hd_out_ready, .fe_hd_out_data,
    .fe_hd_in_valid, .fe_hd_in_ready, .fe_hd_in_data,
    .ecc_start, .ecc_k, .ecc_u, .ecc_done, .ecc_r
  );

endmodule
