// control_unit -- sequencer for the device side of the PUF-based ECDH
// authentication protocol; the only block that talks to the outside world.
//
// It accepts one command at a time and runs it by starting the PUF system and
// the scalar-multiplication unit in turn:
//
//   CMD_ENROLL  (device steps of stage I)
//     1. read every SRAM start-up word once and absorb it into the PRNG seed;
//     2. let the PRNG draw the secret S (= x);
//     3. send the device ID (ID_WORDS words, least significant word first);
//     4. let the fuzzy extractor compute HD = R xor Encode(S) and forward its
//        HD_WORDS words to the output;
//     5. compute PK_ID = x * 9 (X25519 base point) and send its KEY_WORDS words.
//   CMD_AGREE   (device steps of stage II, variants A and B)
//     1. ask an external verifier to check the server certificate (vf_req until
//        vf_done); on failure report ST_ERR_VERIFY and stop;
//     2. take HD_WORDS helper-data words from the input and let the fuzzy
//        extractor reconstruct x;
//     3. take KEY_WORDS words of the server's public key and compute
//        w = x * PK_server; send w (KEY_WORDS words).
//   CMD_AGREE_NOVF  as CMD_AGREE without step 1 (variant C).
//   CMD_STORE_PKTTP (device steps 7-8 of stage I, variants A and B)
//     take KEY_WORDS words of the trusted third party's public key PK_TTP and
//     write them to NVM, then write the lock marker.  Refused with
//     ST_ERR_LOCKED, consuming no input, once a key is stored, so the key
//     cannot be replaced afterwards.
//   CMD_STORE_CERT  (end of stage I, variants B and D)
//     the same for the CERT_WORDS words of Cert_ID = ID | HD | PK_ID | sigma.
//   CMD_SEND_CERT   (session request, variants B and D)
//     send the stored Cert_ID; ST_ERR_EMPTY if none is stored.
//   CMD_AGREE_CERT  (stage II, variants B and D)
//     as CMD_AGREE, but the helper data is read from the stored Cert_ID, so
//     only the server's public key is taken from the input.  The certificate
//     check runs when a PK_TTP is stored (variant B keeps one, variant D
//     does not); ST_ERR_EMPTY if no Cert_ID is stored.
//
// Under CMD_AGREE (and CMD_AGREE_CERT) the stored PK_TTP is read from NVM first and presented on
// vf_pk_ttp for the verifier; with no key stored the command ends with
// ST_ERR_VERIFY without asking the verifier.
//
// NVM reads take one cycle, so a stored word costs two cycles when sent or
// fed to the fuzzy extractor.  Multi-word values travel least significant word first; out_last marks the
// last word of a response.  Secrets are cleared from the control unit's
// registers once the scalar multiplication has used them.
//
// From the paper: the role of the control unit (orchestrate the components,
// handle the outside interface), the device steps of the protocol and the
// requirement that the stored PK_TTP cannot be tampered with.  The
// command set, the NVM word map, the choice of variant B or D by whether a
// PK_TTP is stored, the write-once lock words, the word-stream interface, the verifier handshake and the
// seeding of the PRNG from a full SRAM read are this design's own choices.
// The signature scheme, the key-derivation function and the key-confirmation
// handshake are not specified, so the raw shared secret w is returned.
module control_unit
  import device_pkg::*;
#(
  parameter int SRAM_AW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ID_BITS-1:0]   device_id,
  // command port
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  cmd_e                 cmd,
  output status_e              status,
  // word stream in / out
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [WORD_W-1:0]    in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [WORD_W-1:0]    out_data,
  output logic                 out_last,
  // external certificate verifier
  output logic                 vf_req,
  input  logic                 vf_done,
  input  logic                 vf_ok,
  output logic [KEY_BITS-1:0]  vf_pk_ttp,
  // NVM holding PK_TTP
  output logic                 nvm_en,
  output logic                 nvm_we,
  output logic [NVM_AW-1:0]    nvm_addr,
  output logic [WORD_W-1:0]    nvm_wdata,
  input  logic [WORD_W-1:0]    nvm_rdata,
  // PUF SRAM (shared with the fuzzy extractor through this unit)
  output logic                 sram_en,
  output logic [SRAM_AW-1:0]   sram_addr,
  input  logic [WORD_W-1:0]    sram_rdata,
  // PRNG
  output logic                 prng_absorb,
  output logic [WORD_W-1:0]    prng_seed_word,
  output logic                 prng_gen,
  input  logic                 prng_key_valid,
  input  logic [KEY_BITS-1:0]  prng_key,
  // fuzzy extractor
  output logic                 fe_enroll,
  output logic                 fe_reconstruct,
  output logic [KEY_BITS-1:0]  fe_key_in,
  input  logic                 fe_done,
  input  logic [KEY_BITS-1:0]  fe_key_out,
  input  logic                 fe_sram_en,
  input  logic [SRAM_AW-1:0]   fe_sram_addr,
  input  logic                 fe_hd_out_valid,
  output logic                 fe_hd_out_ready,
  input  logic [WORD_W-1:0]    fe_hd_out_data,
  output logic                 fe_hd_in_valid,
  input  logic                 fe_hd_in_ready,
  output logic [WORD_W-1:0]    fe_hd_in_data,
  // scalar multiplication unit
  output logic                 ecc_start,
  output logic [KEY_BITS-1:0]  ecc_k,
  output logic [KEY_BITS-1:0]  ecc_u,
  input  logic                 ecc_done,
  input  logic [KEY_BITS-1:0]  ecc_r
);

  typedef enum logic [4:0] {
    C_IDLE, C_SEED_RD, C_SEED_AB, C_GEN, C_GEN_W, C_ID_OUT, C_FE_EN, C_HD_OUT,
    C_TTP_RD, C_TTP_CAP, C_VF_WAIT, C_FE_REC, C_HD_IN, C_PK_IN, C_ECC, C_ECC_W,
    C_RES_OUT, C_ST_RD, C_ST_CHK, C_ST_WR, C_ST_LOCK,
    C_CL_RD, C_CL_CHK, C_CO_RD, C_CO_OUT, C_HN_RD, C_HN_FEED, C_HN_WAIT
  } cstate_e;

  cstate_e st;
  logic [SRAM_AW-1:0]  idx;
  logic [KEY_BITS-1:0] secret_q;   // S at enrollment, reconstructed x in the field
  logic [KEY_BITS-1:0] u_q;        // base point 9, or the server's public key
  logic [KEY_BITS-1:0] res_q;      // PK_ID or w
  logic [KEY_BITS-1:0] pk_ttp_q;   // PK_TTP read from NVM
  logic [ID_WORDS*WORD_W-1:0] id_ext;
  // set per command
  logic [NVM_AW-1:0]   area_base;  // first word of the area being stored
  logic [SRAM_AW-1:0]  area_last;  // its last word index
  logic [NVM_AW-1:0]   area_lock;  // its lock word
  logic                hd_nvm;     // helper data comes from the stored Cert_ID
  logic                send_cert;  // CMD_SEND_CERT (else CMD_AGREE_CERT)

  assign id_ext = (ID_WORDS*WORD_W)'(device_id);

  // SRAM: the control unit reads it for seeding, otherwise the fuzzy extractor.
  always_comb begin
    if (st == C_SEED_RD) begin
      sram_en   = 1'b1;
      sram_addr = idx;
    end else begin
      sram_en   = fe_sram_en;
      sram_addr = fe_sram_addr;
    end
  end

  assign prng_absorb    = (st == C_SEED_AB);
  assign prng_seed_word = sram_rdata;
  assign prng_gen       = (st == C_GEN);

  assign fe_enroll       = (st == C_FE_EN);
  assign fe_reconstruct  = (st == C_FE_REC);
  assign fe_key_in       = secret_q;
  assign fe_hd_out_ready = (st == C_HD_OUT) && out_ready;
  assign fe_hd_in_valid  = ((st == C_HD_IN) && in_valid) || (st == C_HN_FEED);
  assign fe_hd_in_data   = (st == C_HN_FEED) ? nvm_rdata : in_data;

  assign ecc_start = (st == C_ECC);
  assign ecc_k     = secret_q;
  assign ecc_u     = u_q;

  assign cmd_ready = (st == C_IDLE);
  assign vf_req    = (st == C_VF_WAIT);
  assign vf_pk_ttp = pk_ttp_q;

  // NVM: lock-word reads, PK_TTP / Cert_ID / HD reads, area writes.
  always_comb begin
    nvm_en    = 1'b0;
    nvm_we    = 1'b0;
    nvm_addr  = NVM_AW'(idx);
    nvm_wdata = in_data;
    unique case (st)
      C_ST_RD:   begin nvm_en = 1'b1; nvm_addr = area_lock; end
      C_TTP_RD:  nvm_en = 1'b1;
      C_ST_WR:   begin nvm_en = in_valid; nvm_we = in_valid;
                       nvm_addr = area_base + NVM_AW'(idx); end
      C_ST_LOCK: begin nvm_en = 1'b1; nvm_we = 1'b1;
                       nvm_addr = area_lock; nvm_wdata = NVM_LOCK_MAGIC; end
      C_CL_RD:   begin nvm_en = 1'b1; nvm_addr = NVM_AW'(NVM_CERT_LOCK); end
      C_CO_RD:   begin nvm_en = 1'b1; nvm_addr = NVM_AW'(NVM_CERT_ADDR) + NVM_AW'(idx); end
      C_HN_RD:   begin nvm_en = 1'b1; nvm_addr = NVM_AW'(NVM_CERT_HD) + NVM_AW'(idx); end
      default: ;
    endcase
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_data  = '0;
    out_last  = 1'b0;
    unique case (st)
      C_HD_IN:  in_ready = fe_hd_in_ready;
      C_PK_IN:  in_ready = 1'b1;
      C_ST_WR:  in_ready = 1'b1;
      C_CO_OUT: begin
        out_valid = 1'b1;
        out_data  = nvm_rdata;   // held by the NVM until its next read
        out_last  = (idx == SRAM_AW'(CERT_WORDS - 1));
      end
      C_ID_OUT: begin
        out_valid = 1'b1;
        out_data  = id_ext[idx*WORD_W +: WORD_W];
      end
      C_HD_OUT: begin
        out_valid = fe_hd_out_valid;
        out_data  = fe_hd_out_data;
      end
      C_RES_OUT: begin
        out_valid = 1'b1;
        out_data  = res_q[idx*WORD_W +: WORD_W];
        out_last  = (idx == SRAM_AW'(KEY_WORDS - 1));
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= C_IDLE;
      status   <= ST_IDLE;
      idx      <= '0;
      secret_q <= '0;
      u_q      <= '0;
      res_q    <= '0;
      pk_ttp_q <= '0;
      area_base <= '0;
      area_last <= '0;
      area_lock <= '0;
      hd_nvm    <= 1'b0;
      send_cert <= 1'b0;
    end else begin
      unique case (st)
        C_IDLE: begin
          idx <= '0;
          if (cmd_valid) begin
            status    <= ST_BUSY;
            hd_nvm    <= (cmd == CMD_AGREE_CERT);
            send_cert <= (cmd == CMD_SEND_CERT);
            if (cmd == CMD_STORE_CERT) begin
              area_base <= NVM_AW'(NVM_CERT_ADDR);
              area_last <= SRAM_AW'(CERT_WORDS - 1);
              area_lock <= NVM_AW'(NVM_CERT_LOCK);
            end else begin
              area_base <= '0;
              area_last <= SRAM_AW'(KEY_WORDS - 1);
              area_lock <= NVM_AW'(NVM_LOCK_ADDR);
            end
            unique case (cmd)
              CMD_ENROLL:      st <= C_SEED_RD;
              CMD_AGREE:       st <= C_TTP_RD;
              CMD_AGREE_NOVF:  st <= C_FE_REC;
              CMD_STORE_PKTTP,
              CMD_STORE_CERT:  st <= C_ST_RD;
              CMD_SEND_CERT,
              CMD_AGREE_CERT:  st <= C_CL_RD;
              default:         status <= ST_IDLE;
            endcase
          end
        end
        // ---- enrollment ----
        C_SEED_RD: st <= C_SEED_AB;
        C_SEED_AB: begin
          if (idx == SRAM_AW'(SRAM_WORDS - 1)) begin
            idx <= '0;
            st  <= C_GEN;
          end else begin
            idx <= idx + 1'b1;
            st  <= C_SEED_RD;
          end
        end
        C_GEN:   st <= C_GEN_W;
        C_GEN_W: if (prng_key_valid) begin
          secret_q <= prng_key;
          st       <= C_ID_OUT;
        end
        C_ID_OUT: if (out_ready) begin
          if (idx == SRAM_AW'(ID_WORDS - 1)) begin
            idx <= '0;
            st  <= C_FE_EN;
          end else idx <= idx + 1'b1;
        end
        C_FE_EN:  st <= C_HD_OUT;
        C_HD_OUT: if (fe_done) begin
          u_q <= KEY_BITS'(9);
          st  <= C_ECC;
        end
        // ---- PK_TTP / Cert_ID storage (write once) ----
        C_ST_RD:  st <= C_ST_CHK;
        C_ST_CHK: begin
          idx <= '0;
          if (nvm_rdata == NVM_LOCK_MAGIC) begin
            status <= ST_ERR_LOCKED;
            st     <= C_IDLE;
          end else st <= C_ST_WR;
        end
        C_ST_WR: if (in_valid) begin
          if (idx == area_last) begin
            idx <= '0;
            st  <= C_ST_LOCK;
          end else idx <= idx + 1'b1;
        end
        C_ST_LOCK: begin
          status <= ST_DONE;
          st     <= C_IDLE;
        end
        // ---- stored certificate: present? then send it or use its HD ----
        C_CL_RD:  st <= C_CL_CHK;
        C_CL_CHK: begin
          idx <= '0;
          if (nvm_rdata != NVM_LOCK_MAGIC) begin
            status <= ST_ERR_EMPTY;
            st     <= C_IDLE;
          end else if (send_cert) st <= C_CO_RD;
          else                    st <= C_TTP_RD;
        end
        C_CO_RD:  st <= C_CO_OUT;
        C_CO_OUT: if (out_ready) begin
          if (idx == SRAM_AW'(CERT_WORDS - 1)) begin
            idx    <= '0;
            status <= ST_DONE;
            st     <= C_IDLE;
          end else begin
            idx <= idx + 1'b1;
            st  <= C_CO_RD;
          end
        end
        C_HN_RD:   st <= C_HN_FEED;
        C_HN_FEED: if (fe_hd_in_ready) begin
          if (idx == SRAM_AW'(HD_WORDS - 1)) begin
            idx <= '0;
            st  <= C_HN_WAIT;
          end else begin
            idx <= idx + 1'b1;
            st  <= C_HN_RD;
          end
        end
        C_HN_WAIT: if (fe_done) begin
          secret_q <= fe_key_out;
          idx      <= '0;
          st       <= C_PK_IN;
        end
        // ---- key agreement ----
        // read PK_TTP words 0..KEY_WORDS-1 and the lock word
        C_TTP_RD:  st <= C_TTP_CAP;
        C_TTP_CAP: begin
          if (idx == SRAM_AW'(NVM_LOCK_ADDR)) begin
            idx <= '0;
            if (nvm_rdata == NVM_LOCK_MAGIC) st <= C_VF_WAIT;
            else if (hd_nvm)                 st <= C_FE_REC;  // variant D
            else begin
              status <= ST_ERR_VERIFY;
              st     <= C_IDLE;
            end
          end else begin
            pk_ttp_q <= {nvm_rdata, pk_ttp_q[KEY_BITS-1:WORD_W]};
            idx      <= idx + 1'b1;
            st       <= C_TTP_RD;
          end
        end
        C_VF_WAIT: if (vf_done) begin
          if (vf_ok) st <= C_FE_REC;
          else begin
            status <= ST_ERR_VERIFY;
            st     <= C_IDLE;
          end
        end
        C_FE_REC: st <= hd_nvm ? C_HN_RD : C_HD_IN;
        C_HD_IN:  if (fe_done) begin
          secret_q <= fe_key_out;
          idx      <= '0;
          st       <= C_PK_IN;
        end
        C_PK_IN: if (in_valid) begin
          u_q <= {in_data, u_q[KEY_BITS-1:WORD_W]};
          if (idx == SRAM_AW'(KEY_WORDS - 1)) begin
            idx <= '0;
            st  <= C_ECC;
          end else idx <= idx + 1'b1;
        end
        // ---- scalar multiplication and result ----
        C_ECC:   st <= C_ECC_W;
        C_ECC_W: if (ecc_done) begin
          res_q    <= ecc_r;
          secret_q <= '0;
          idx      <= '0;
          st       <= C_RES_OUT;
        end
        C_RES_OUT: if (out_ready) begin
          if (idx == SRAM_AW'(KEY_WORDS - 1)) begin
            idx    <= '0;
            status <= ST_DONE;
            st     <= C_IDLE;
          end else idx <= idx + 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // Output words must hold while the receiver stalls.
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
