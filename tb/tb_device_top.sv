// tb_device_top -- end-to-end test of the device subsystem playing the
// protocol against a testbench "server" and "trusted third party" that use
// the reference X25519 model.  Two chips are instantiated: a legitimate one
// (all parameters at their defaults) and a counterfeit built from the same
// design but with a different SRAM (another PUF_SEED).
//
// Sequence: power-up; enroll the legitimate chip (ID, HD, PK_ID recorded as its
// certificate contents); store PK_TTP on it; an attempt to overwrite PK_TTP must be
// refused; store Cert_ID = ID | HD | PK_ID | sigma on it, and a copy of the
// same certificate on the counterfeit; power-cycle and enroll again (must
// give a new key);
// key agreement with a rejected server certificate; key agreement with an
// accepted certificate after a power cycle (fresh SRAM noise) -- the device's w
// must equal the server's SK_server * PK_ID; key agreement without
// verification; variant B on the legitimate chip (send the stored Cert_ID,
// verified agreement from the stored HD); the counterfeit, which holds no
// PK_TTP, runs the variant D agreement from the copied certificate and must
// derive a different w, as must its agreement from HD given on the input.
// Each mechanism is counted and must occur at least once:
// enrollment, PK_TTP store and overwrite refusal, Cert_ID store and send,
// agreement from the stored HD with (B) and without (D) verification,
// fresh key per enrollment,
// certificate rejection, verified and
// unverified agreement, error correction of PUF noise, counterfeit detection,
// output back-pressure and input gaps.
module tb_device_top;
  import device_pkg::*;
  import x25519_ref_pkg::*;

  localparam int ND = 2;          // 0: legitimate chip, 1: counterfeit

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic puf_power_up = 0;
  logic [ID_BITS-1:0] device_id [ND];
  logic cmd_valid [ND], cmd_ready [ND];
  cmd_e cmd [ND];
  status_e status [ND];
  logic in_valid [ND], in_ready [ND], out_valid [ND], out_ready [ND], out_last [ND];
  logic [WORD_W-1:0] in_data [ND], out_data [ND];
  logic vf_req [ND], vf_done [ND], vf_ok [ND];
  logic [15:0] puf_n_corrected [ND];
  logic [KEY_BITS-1:0] vf_pk_ttp [ND];

  device_top dev (
    .clk, .rst_n, .puf_power_up, .device_id(device_id[0]),
    .cmd_valid(cmd_valid[0]), .cmd_ready(cmd_ready[0]), .cmd(cmd[0]), .status(status[0]),
    .in_valid(in_valid[0]), .in_ready(in_ready[0]), .in_data(in_data[0]),
    .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_data(out_data[0]), .out_last(out_last[0]),
    .vf_req(vf_req[0]), .vf_done(vf_done[0]), .vf_ok(vf_ok[0]), .vf_pk_ttp(vf_pk_ttp[0]),
    .puf_n_corrected(puf_n_corrected[0]));

  device_top #(.PUF_SEED(32'hC10E_BEEF)) clone (
    .clk, .rst_n, .puf_power_up, .device_id(device_id[1]),
    .cmd_valid(cmd_valid[1]), .cmd_ready(cmd_ready[1]), .cmd(cmd[1]), .status(status[1]),
    .in_valid(in_valid[1]), .in_ready(in_ready[1]), .in_data(in_data[1]),
    .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_data(out_data[1]), .out_last(out_last[1]),
    .vf_req(vf_req[1]), .vf_done(vf_done[1]), .vf_ok(vf_ok[1]), .vf_pk_ttp(vf_pk_ttp[1]),
    .puf_n_corrected(puf_n_corrected[1]));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // mechanism counters
  int n_store = 0, n_store_refused = 0, n_enroll = 0, n_fresh_key = 0, n_reject = 0, n_agree_vf = 0, n_agree_novf = 0;
  int n_cert_store = 0, n_cert_send = 0, n_agree_b = 0, n_agree_d = 0;
  int n_corrected_runs = 0, n_clone_detected = 0, n_out_stall = 0, n_in_gap = 0;

  // output collectors, random back-pressure, verifier stand-ins
  logic [WORD_W-1:0] outq0 [$], outq1 [$];
  bit vf_answer [ND];
  always @(posedge clk) begin
    for (int d = 0; d < ND; d++) begin
      if (rst_n && out_valid[d] && out_ready[d]) begin
        if (d == 0) outq0.push_back(out_data[d]); else outq1.push_back(out_data[d]);
      end
      if (out_valid[d] && !out_ready[d]) n_out_stall++;
      if (in_ready[d] && !in_valid[d]) n_in_gap++;
      out_ready[d] <= ($urandom_range(4) != 0);
      vf_done[d] <= 1'b0;
      if (vf_req[d] && !vf_done[d]) begin
        vf_done[d] <= 1'b1;
        vf_ok[d]   <= vf_answer[d];
      end
    end
  end

  task automatic issue(input int d, input cmd_e c);
    @(negedge clk); cmd[d] = c; cmd_valid[d] = 1;
    while (!cmd_ready[d]) @(negedge clk);
    @(negedge clk); cmd_valid[d] = 0;
  endtask

  task automatic send(input int d, input logic [WORD_W-1:0] w);
    in_valid[d] = 1; in_data[d] = w;
    @(posedge clk);
    while (!in_ready[d]) @(posedge clk);
    @(negedge clk); in_valid[d] = 0;
    if ($urandom_range(3) == 0) @(negedge clk);
  endtask

  task automatic wait_idle(input int d);
    @(negedge clk);
    while (!cmd_ready[d]) @(negedge clk);
    repeat (4) @(negedge clk);
  endtask

  task automatic power_cycle();
    @(negedge clk); puf_power_up = 1;
    @(negedge clk); puf_power_up = 0;
  endtask

  function automatic logic [KEY_BITS-1:0] words_to_key(input logic [WORD_W-1:0] q [$], input int from);
    logic [KEY_BITS-1:0] k;
    for (int i = 0; i < KEY_WORDS; i++) k[i*WORD_W +: WORD_W] = q[from + i];
    return k;
  endfunction

  // key agreement on chip d with helper data hd and the server's public key
  task automatic agree(input int d, input cmd_e c, input logic [WORD_W-1:0] hd [HD_WORDS],
                       input logic [KEY_BITS-1:0] pk_srv, output logic [KEY_BITS-1:0] w);
    issue(d, c);
    for (int i = 0; i < HD_WORDS; i++) send(d, hd[i]);
    for (int i = 0; i < KEY_WORDS; i++) send(d, pk_srv[i*WORD_W +: WORD_W]);
    wait_idle(d);
    if (d == 0) begin
      check(outq0.size() == KEY_WORDS, "agreement output length");
      w = words_to_key(outq0, 0); outq0.delete();
    end else begin
      check(outq1.size() == KEY_WORDS, "agreement output length (clone)");
      w = words_to_key(outq1, 0); outq1.delete();
    end
  endtask

  initial begin
    logic [WORD_W-1:0] hd [HD_WORDS];
    logic [WORD_W-1:0] cert [CERT_WORDS];
    int bad;
    logic [KEY_BITS-1:0] pk_id, pk_id2, w_dev, w_srv, w_clone;
    logic [KEY_BITS-1:0] sk_srv, pk_srv, pk_ttp;

    device_id[0] = 48'h4242_F424_242F;
    device_id[1] = 48'h4242_F424_242F;      // the counterfeit claims the same ID
    for (int d = 0; d < ND; d++) begin
      cmd_valid[d] = 0; cmd[d] = CMD_ENROLL; in_valid[d] = 0; in_data[d] = '0;
      vf_answer[d] = 1;
    end
    sk_srv = 256'h77076d0a7318a57d3c16c17251b26645df4c2f87ebc0992ab177fba51db92c2a;
    pk_srv = x25519_ref(sk_srv, 256'd9);
    for (int i = 0; i < KEY_WORDS; i++) pk_ttp[i*32 +: 32] = $urandom;

    repeat (3) @(negedge clk); rst_n = 1;
    power_cycle();

    // ---- stage I: enrollment (twice, across a power cycle) ----
    issue(0, CMD_ENROLL);
    wait_idle(0);
    check(status[0] == ST_DONE, "enroll status");
    check(outq0.size() == ID_WORDS + HD_WORDS + KEY_WORDS, "enroll output length");
    check({outq0[1][15:0], outq0[0]} == device_id[0], "ID sent");
    for (int i = 0; i < HD_WORDS; i++) hd[i] = outq0[ID_WORDS + i];
    pk_id = words_to_key(outq0, ID_WORDS + HD_WORDS);
    // the TTP signs (ID, HD, PK_ID); sigma is opaque to the device
    for (int i = 0; i < CERT_WORDS; i++)
      cert[i] = (i < ID_WORDS + HD_WORDS + KEY_WORDS) ? outq0[i] : $urandom;
    outq0.delete();
    n_enroll++;

    // steps 7-8: the TTP's public key is stored and locked on the legitimate chip
    for (int d = 0; d < 1; d++) begin
      issue(d, CMD_STORE_PKTTP);
      for (int i = 0; i < KEY_WORDS; i++) send(d, pk_ttp[i*WORD_W +: WORD_W]);
      wait_idle(d);
      check(status[d] == ST_DONE, "PK_TTP stored");
      if (status[d] == ST_DONE) n_store++;
    end
    // a later attempt to replace it is refused
    issue(0, CMD_STORE_PKTTP);
    wait_idle(0);
    check(status[0] == ST_ERR_LOCKED, "PK_TTP overwrite refused");
    if (status[0] == ST_ERR_LOCKED) n_store_refused++;
    // Cert_ID stored on the chip; the counterfeit gets a copy of it
    for (int d = 0; d < ND; d++) begin
      issue(d, CMD_STORE_CERT);
      for (int i = 0; i < CERT_WORDS; i++) send(d, cert[i]);
      wait_idle(d);
      check(status[d] == ST_DONE, "Cert_ID stored");
      if (status[d] == ST_DONE) n_cert_store++;
    end

    power_cycle();
    issue(0, CMD_ENROLL);
    wait_idle(0);
    pk_id2 = words_to_key(outq0, ID_WORDS + HD_WORDS);
    outq0.delete();
    n_enroll++;
    check(pk_id2 != pk_id, "re-enrollment draws a new key");
    if (pk_id2 != pk_id) n_fresh_key++;
    // the second enrollment is discarded; the TTP certified the first (HD, PK_ID)

    // server side of the key agreement
    w_srv = x25519_ref(sk_srv, pk_id);

    // ---- stage II: rejected server certificate ----
    vf_answer[0] = 0;
    issue(0, CMD_AGREE);
    wait_idle(0);
    check(status[0] == ST_ERR_VERIFY && outq0.size() == 0, "rejected certificate");
    check(vf_pk_ttp[0] == pk_ttp, "verifier gets the stored PK_TTP");
    if (status[0] == ST_ERR_VERIFY) n_reject++;
    vf_answer[0] = 1;

    // ---- stage II: accepted certificate, fresh power-up noise ----
    power_cycle();
    agree(0, CMD_AGREE, hd, pk_srv, w_dev);
    check(status[0] == ST_DONE, "agree status");
    check(w_dev == w_srv, "device and server derive the same w");
    if (w_dev == w_srv) n_agree_vf++;
    if (puf_n_corrected[0] > 0) n_corrected_runs++;
    $display("agreement: %0d response bits corrected", puf_n_corrected[0]);

    // ---- stage II without verification (variant C) ----
    agree(0, CMD_AGREE_NOVF, hd, pk_srv, w_dev);
    check(w_dev == w_srv, "unverified agreement derives the same w");
    if (w_dev == w_srv) n_agree_novf++;
    if (puf_n_corrected[0] > 0) n_corrected_runs++;

    // ---- variant B: session request answered with the stored Cert_ID ----
    issue(0, CMD_SEND_CERT);
    wait_idle(0);
    bad = 0;
    for (int i = 0; i < CERT_WORDS && i < outq0.size(); i++) bad += int'(outq0[i] != cert[i]);
    check(status[0] == ST_DONE && outq0.size() == CERT_WORDS && bad == 0, "Cert_ID sent");
    if (status[0] == ST_DONE && bad == 0) n_cert_send++;
    outq0.delete();
    power_cycle();
    issue(0, CMD_AGREE_CERT);
    for (int i = 0; i < KEY_WORDS; i++) send(0, pk_srv[i*WORD_W +: WORD_W]);
    wait_idle(0);
    w_dev = words_to_key(outq0, 0);
    check(status[0] == ST_DONE && outq0.size() == KEY_WORDS && w_dev == w_srv,
          "variant B: w from the stored HD");
    if (w_dev == w_srv) n_agree_b++;
    if (puf_n_corrected[0] > 0) n_corrected_runs++;
    outq0.delete();

    // ---- counterfeit, variant D: copied Cert_ID, no PK_TTP, no verification ----
    issue(1, CMD_AGREE_CERT);
    for (int i = 0; i < KEY_WORDS; i++) send(1, pk_srv[i*WORD_W +: WORD_W]);
    wait_idle(1);
    w_clone = words_to_key(outq1, 0);
    check(status[1] == ST_DONE && outq1.size() == KEY_WORDS, "variant D agreement runs");
    if (status[1] == ST_DONE) n_agree_d++;
    check(w_clone != w_srv, "counterfeit (variant D) derives a different w");
    if (w_clone != w_srv) n_clone_detected++;
    outq1.delete();

    // ---- counterfeit chip given the legitimate chip's helper data ----
    agree(1, CMD_AGREE_NOVF, hd, pk_srv, w_clone);
    check(w_clone != w_srv, "counterfeit derives a different w");
    if (w_clone != w_srv) n_clone_detected++;
    $display("counterfeit: %0d response bits 'corrected'", puf_n_corrected[1]);

    $display("mechanisms: store=%0d store_refused=%0d cert_store=%0d cert_send=%0d agree_b=%0d agree_d=%0d",
             n_store, n_store_refused, n_cert_store, n_cert_send, n_agree_b, n_agree_d);
    $display("mechanisms: enroll=%0d fresh_key=%0d reject=%0d agree_vf=%0d agree_novf=%0d noise_corrected=%0d clone_detected=%0d out_stall=%0d in_gap=%0d",
             n_enroll, n_fresh_key, n_reject, n_agree_vf, n_agree_novf, n_corrected_runs,
             n_clone_detected, n_out_stall, n_in_gap);
    check(n_enroll > 0,         "mechanism: enrollment");
    check(n_store > 0,          "mechanism: PK_TTP store");
    check(n_store_refused > 0,  "mechanism: PK_TTP overwrite refused");
    check(n_cert_store > 0,     "mechanism: Cert_ID store");
    check(n_cert_send > 0,      "mechanism: Cert_ID sent on session request");
    check(n_agree_b > 0,        "mechanism: verified agreement from stored HD (B)");
    check(n_agree_d > 0,        "mechanism: unverified agreement from stored HD (D)");
    check(n_fresh_key > 0,      "mechanism: fresh key per enrollment");
    check(n_reject > 0,         "mechanism: certificate rejection");
    check(n_agree_vf > 0,       "mechanism: verified key agreement");
    check(n_agree_novf > 0,     "mechanism: unverified key agreement");
    check(n_corrected_runs > 0, "mechanism: PUF noise correction");
    check(n_clone_detected > 0, "mechanism: counterfeit detection");
    check(n_out_stall > 0,      "mechanism: output back-pressure");
    check(n_in_gap > 0,         "mechanism: input gaps");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
