// tb_control_unit -- checks the protocol sequencing of the control unit with
// the real PRNG, fuzzy extractor and scalar multiplier around it and an SRAM
// held by the testbench.  Every expected value is computed here from reference
// models (xorshift128, repetition code, RFC 7748 X25519):
//
//  * ENROLL: the output stream is ID (2 words), HD (168 words) = R xor
//    Encode(S), PK_ID (8 words) = X25519(S, 9), where S is the PRNG output
//    after absorbing the 180 SRAM words; out_last only on the final word.
//  * AGREE before any PK_TTP is stored: ST_ERR_VERIFY, verifier not asked.
//  * SEND_CERT / AGREE_CERT before a certificate is stored: ST_ERR_EMPTY.
//  * STORE_CERT of ID | HD | PK_ID | sigma: lands in NVM and is locked; a
//    second store is refused; SEND_CERT returns it word for word.
//  * AGREE_CERT with no PK_TTP stored (variant D): verifier not asked, only
//    the server key is taken from the input, w is right.
//  * STORE_PKTTP: the key lands in NVM; a second store is refused with
//    ST_ERR_LOCKED and consumes no input; AGREE presents the stored key on
//    vf_pk_ttp.
//  * AGREE with a failing certificate check: status ST_ERR_VERIFY, no output.
//  * AGREE with a passing check, after flipping SRAM bits: w = X25519(S, PK_srv).
//  * AGREE_NOVF: the verifier is never asked, same w.
//  * AGREE_CERT with PK_TTP stored (variant B): verifier asked; rejected and
//    accepted cases.
//  The output is randomly stalled throughout.
module tb_control_unit;
  import device_pkg::*;
  import x25519_ref_pkg::*;
  localparam int AW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [ID_BITS-1:0] device_id = 48'hA1B2_C3D4_E5F6;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd = CMD_ENROLL;
  status_e status;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [WORD_W-1:0] in_data = '0, out_data;
  logic vf_req, vf_done = 0, vf_ok = 0;
  logic [KEY_BITS-1:0] vf_pk_ttp;
  logic nvm_en, nvm_we;
  logic [NVM_AW-1:0] nvm_addr;
  logic [WORD_W-1:0] nvm_wdata, nvm_rdata;
  logic sram_en;
  logic [AW-1:0] sram_addr;
  logic [WORD_W-1:0] sram_rdata;
  logic prng_absorb, prng_gen, prng_busy, prng_key_valid;
  logic [WORD_W-1:0] prng_seed_word;
  logic [KEY_BITS-1:0] prng_key, fe_key_in, fe_key_out, ecc_k, ecc_u, ecc_r;
  logic fe_enroll, fe_reconstruct, fe_busy, fe_done, fe_sram_en;
  logic [AW-1:0] fe_sram_addr;
  logic [15:0] fe_n_corrected;
  logic fe_hd_out_valid, fe_hd_out_ready, fe_hd_in_valid, fe_hd_in_ready;
  logic [WORD_W-1:0] fe_hd_out_data, fe_hd_in_data;
  logic ecc_start, ecc_busy, ecc_done;

  logic [WORD_W-1:0] sram [SRAM_WORDS];
  always_ff @(posedge clk) if (sram_en) sram_rdata <= sram[sram_addr];

  control_unit #(.SRAM_AW(AW)) dut (.*);

  nvm #(.WORDS(NVM_WORDS), .WIDTH(WORD_W), .AW(NVM_AW)) u_nvm (.clk, .en(nvm_en), .we(nvm_we),
    .addr(nvm_addr), .wdata(nvm_wdata), .rdata(nvm_rdata));
  int in_taken = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) in_taken++;

  prng #(.KEY_BITS(KEY_BITS)) u_prng (.clk, .rst_n, .absorb(prng_absorb), .seed_word(prng_seed_word),
    .gen(prng_gen), .busy(prng_busy), .key_valid(prng_key_valid), .key(prng_key));
  fuzzy_extractor #(.KEY_BITS(KEY_BITS), .REP(REP), .WIDTH(WORD_W), .AW(AW)) u_fe (
    .clk, .rst_n, .enroll(fe_enroll), .reconstruct(fe_reconstruct), .key_in(fe_key_in),
    .busy(fe_busy), .done(fe_done), .key_out(fe_key_out), .n_corrected(fe_n_corrected),
    .sram_en(fe_sram_en), .sram_addr(fe_sram_addr), .sram_rdata,
    .hd_out_valid(fe_hd_out_valid), .hd_out_ready(fe_hd_out_ready), .hd_out_data(fe_hd_out_data),
    .hd_in_valid(fe_hd_in_valid), .hd_in_ready(fe_hd_in_ready), .hd_in_data(fe_hd_in_data));
  x25519_core u_ecc (.clk, .rst_n, .start(ecc_start), .k(ecc_k), .u(ecc_u),
    .busy(ecc_busy), .done(ecc_done), .r(ecc_r));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // output collector
  logic [WORD_W-1:0] outq [$];
  int last_pos [$];
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      outq.push_back(out_data);
      if (out_last) last_pos.push_back(outq.size());
    end
    out_ready <= ($urandom_range(3) != 0);
  end

  // certificate verifier stand-in
  bit vf_answer;
  int vf_requests = 0;
  always @(posedge clk) begin
    vf_done <= 1'b0;
    if (vf_req && !vf_done) begin
      vf_done <= 1'b1;
      vf_ok   <= vf_answer;
      vf_requests++;
    end
  end

  task automatic issue(input cmd_e c);
    @(negedge clk); cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic send(input logic [WORD_W-1:0] w);
    in_valid = 1; in_data = w;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
    if ($urandom_range(2) == 0) @(negedge clk);
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    xs128_t s;
    logic [KEY_BITS-1:0] secret, pk_expect, pk_got, w_expect, w_got;
    logic [KEY_BITS-1:0] sk_srv, pk_srv, pk_ttp;
    logic [WORD_W-1:0] hd [HD_WORDS];
    logic [WORD_W-1:0] cert [CERT_WORDS];
    int bad, vf_before;

    for (int i = 0; i < SRAM_WORDS; i++) sram[i] = $urandom;
    for (int i = 0; i < KEY_WORDS; i++) pk_ttp[i*32 +: 32] = $urandom;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- enrollment ----
    s = xs_init();
    for (int i = 0; i < SRAM_WORDS; i++) s = xs_step(s, sram[i]);
    for (int i = 0; i < KEY_WORDS; i++) begin s = xs_step(s, 0); secret[i*32 +: 32] = s.w; end
    pk_expect = x25519_ref(secret, 256'd9);
    issue(CMD_ENROLL);
    wait_idle();
    check(status == ST_DONE, "enroll status");
    check(outq.size() == ID_WORDS + HD_WORDS + KEY_WORDS, $sformatf("enroll words %0d", outq.size()));
    check(last_pos.size() == 1 && last_pos[0] == outq.size(), "out_last on final word only");
    check({outq[1][15:0], outq[0]} == device_id && outq[1][31:16] == 0, "ID words");
    bad = 0;
    for (int i = 0; i < HD_WORDS; i++) begin
      hd[i] = outq[ID_WORDS + i];
      for (int b = 0; b < WORD_W; b++)
        bad += int'(hd[i][b] != (sram[i][b] ^ secret[(i*WORD_W + b) / REP]));
    end
    check(bad == 0, $sformatf("HD bits wrong: %0d", bad));
    for (int i = 0; i < KEY_WORDS; i++) pk_got[i*32 +: 32] = outq[ID_WORDS + HD_WORDS + i];
    check(pk_got == pk_expect, "PK_ID = X25519(S, 9)");
    // Cert_ID as the third party would return it: ID | HD | PK_ID | sigma
    for (int i = 0; i < CERT_WORDS; i++)
      cert[i] = (i < ID_WORDS + HD_WORDS + KEY_WORDS) ? outq[i] : $urandom;
    outq.delete(); last_pos.delete();

    // server key pair (RFC 7748 section 6.1, Bob)
    sk_srv = 256'hebe088ff278b2f1cfdb6182629b13b6fe60e80838b7fe1794b8a4a627e08ab5d;
    pk_srv = 256'h4f2b886f147efcad4d67785bc843833f3735e4ecc2615bd3b4c17d7b7ddb9ede;
    w_expect = x25519_ref(secret, pk_srv);
    check(w_expect == x25519_ref(sk_srv, pk_expect), "reference ECDH agrees");

    // ---- key agreement before PK_TTP is stored ----
    vf_answer = 1;
    vf_before = vf_requests;
    issue(CMD_AGREE);
    wait_idle();
    check(status == ST_ERR_VERIFY && vf_requests == vf_before, "no PK_TTP: refused without verifier");

    // ---- certificate commands before a certificate is stored ----
    issue(CMD_SEND_CERT);
    wait_idle();
    check(status == ST_ERR_EMPTY && outq.size() == 0, "no Cert_ID: send refused");
    issue(CMD_AGREE_CERT);
    wait_idle();
    check(status == ST_ERR_EMPTY && vf_requests == vf_before, "no Cert_ID: agree refused");

    // ---- store Cert_ID, refuse a second store, send it back ----
    issue(CMD_STORE_CERT);
    for (int i = 0; i < CERT_WORDS; i++) send(cert[i]);
    wait_idle();
    check(status == ST_DONE, "Cert_ID stored");
    bad = 0;
    for (int i = 0; i < CERT_WORDS; i++) bad += int'(u_nvm.mem[NVM_CERT_ADDR + i] != cert[i]);
    check(bad == 0 && u_nvm.mem[NVM_CERT_LOCK] == NVM_LOCK_MAGIC, "Cert_ID in NVM and locked");
    check(u_nvm.mem[NVM_LOCK_ADDR] != NVM_LOCK_MAGIC, "PK_TTP area untouched");
    vf_before = in_taken;
    fork
      issue(CMD_STORE_CERT);
      begin in_valid = 1; in_data = 32'hBAD0_BAD0; end
    join
    wait_idle();
    in_valid = 0;
    check(status == ST_ERR_LOCKED && in_taken == vf_before, "second Cert_ID store refused");
    issue(CMD_SEND_CERT);
    wait_idle();
    bad = 0;
    for (int i = 0; i < CERT_WORDS && i < outq.size(); i++) bad += int'(outq[i] != cert[i]);
    check(status == ST_DONE && outq.size() == CERT_WORDS && bad == 0, "Cert_ID sent back");
    check(last_pos.size() == 1 && last_pos[0] == CERT_WORDS, "out_last on last Cert_ID word");
    outq.delete(); last_pos.delete();

    // ---- variant D: agreement from the stored HD, no verification ----
    vf_before = vf_requests;
    bad = in_taken;
    issue(CMD_AGREE_CERT);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    wait_idle();
    for (int i = 0; i < KEY_WORDS; i++) w_got[i*32 +: 32] = outq[i];
    check(status == ST_DONE && vf_requests == vf_before, "variant D: no verifier");
    check(in_taken == bad + KEY_WORDS, "variant D: only PK_server taken");
    check(outq.size() == KEY_WORDS && w_got == w_expect, "variant D: w");
    outq.delete(); last_pos.delete();

    // ---- store PK_TTP, then try to overwrite it ----
    issue(CMD_STORE_PKTTP);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_ttp[i*32 +: 32]);
    wait_idle();
    check(status == ST_DONE, "PK_TTP stored");
    for (int i = 0; i < KEY_WORDS; i++) check(u_nvm.mem[i] == pk_ttp[i*32 +: 32], "NVM word");
    check(u_nvm.mem[NVM_LOCK_ADDR] == NVM_LOCK_MAGIC, "NVM locked");
    vf_before = in_taken;
    fork
      issue(CMD_STORE_PKTTP);
      begin in_valid = 1; in_data = 32'hBAD0_BAD0; end
    join
    wait_idle();
    in_valid = 0;
    check(status == ST_ERR_LOCKED && in_taken == vf_before, "second store refused, no input taken");
    check(u_nvm.mem[0] == pk_ttp[31:0], "stored key unchanged");

    // ---- key agreement, certificate rejected ----
    // The device must stop on its own; if it waits for input instead, feed it
    // so that any output it would then produce is seen.
    vf_answer = 0;
    issue(CMD_AGREE);
    repeat (50) @(negedge clk);
    check(cmd_ready, "device stops after a rejected certificate");
    if (!cmd_ready) begin
      for (int i = 0; i < HD_WORDS; i++) send(hd[i]);
      for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    end
    wait_idle();
    check(status == ST_ERR_VERIFY, "rejected certificate reported");
    check(vf_pk_ttp == pk_ttp, "stored PK_TTP presented to the verifier");
    check(outq.size() == 0, "no output after rejection");

    // ---- key agreement with noisy SRAM ----
    for (int i = 0; i < SRAM_WORDS; i++) sram[i] ^= (32'h1 << (i % 32)) | (32'h1 << ((i * 7) % 32));
    vf_answer = 1;
    vf_before = vf_requests;
    issue(CMD_AGREE);
    for (int i = 0; i < HD_WORDS; i++) send(hd[i]);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    wait_idle();
    check(vf_requests == vf_before + 1, "verifier asked once");
    check(status == ST_DONE, "agree status");
    check(outq.size() == KEY_WORDS, $sformatf("agree words %0d", outq.size()));
    for (int i = 0; i < KEY_WORDS; i++) w_got[i*32 +: 32] = outq[i];
    check(w_got == w_expect, "w = X25519(x, PK_server)");
    check(fe_n_corrected > 0, "noise corrected");
    outq.delete(); last_pos.delete();

    // ---- key agreement without verification ----
    vf_before = vf_requests;
    issue(CMD_AGREE_NOVF);
    for (int i = 0; i < HD_WORDS; i++) send(hd[i]);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    wait_idle();
    check(vf_requests == vf_before, "verifier not asked");
    for (int i = 0; i < KEY_WORDS; i++) w_got[i*32 +: 32] = outq[i];
    check(outq.size() == KEY_WORDS && w_got == w_expect, "w without verification");
    outq.delete(); last_pos.delete();

    // ---- variant B: stored HD, PK_TTP stored, so the verifier is asked ----
    vf_answer = 0;
    vf_before = vf_requests;
    issue(CMD_AGREE_CERT);
    wait_idle();
    check(status == ST_ERR_VERIFY && vf_requests == vf_before + 1 && outq.size() == 0,
          "variant B: rejected certificate");
    vf_answer = 1;
    issue(CMD_AGREE_CERT);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    wait_idle();
    for (int i = 0; i < KEY_WORDS; i++) w_got[i*32 +: 32] = outq[i];
    check(status == ST_DONE && vf_requests == vf_before + 2, "variant B: verifier asked");
    check(outq.size() == KEY_WORDS && w_got == w_expect, "variant B: w from noisy SRAM");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
