// tb_device_top_full -- complete protocol runs on the device subsystem with
// every parameter at its default: power-up and enrollment (ID, 168 HD words,
// PK_ID); then variant D, the variant a hardware prototype would be checked
// with first: the signed certificate is stored on the device, sent back on a
// session request, and after a power cycle the device derives w from the HD
// in its stored certificate with no verification; then variant A: PK_TTP is
// stored, and after another power cycle the device agrees on w with a
// verified server certificate and the HD supplied on the input.
// Checks the message lengths, the ID, the certificate read-back, that the
// server's SK_server * PK_ID equals the device's w in both sessions (RFC 7748
// reference model), and the cycle counts.
module tb_device_top_full;
  import device_pkg::*;
  import x25519_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic puf_power_up = 0;
  logic [ID_BITS-1:0] device_id = 48'h0011_2233_4455;
  logic cmd_valid = 0, cmd_ready;
  cmd_e cmd = CMD_ENROLL;
  status_e status;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  logic [WORD_W-1:0] in_data = '0, out_data;
  logic vf_req, vf_done = 0, vf_ok = 1;
  logic [15:0] puf_n_corrected;
  logic [KEY_BITS-1:0] vf_pk_ttp;

  device_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [WORD_W-1:0] outq [$];
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) outq.push_back(out_data);
    vf_done <= vf_req && !vf_done;
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
  endtask

  task automatic wait_idle(output int cyc);
    cyc = 0;
    @(negedge clk);
    while (!cmd_ready) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    logic [WORD_W-1:0] hd [HD_WORDS];
    logic [WORD_W-1:0] cert [CERT_WORDS];
    logic [KEY_BITS-1:0] pk_id, w_dev, w_srv, sk_srv, pk_srv;
    int cyc_enroll, cyc_agree, cyc_store, cyc_agree_d, bad;
    sk_srv = 256'hebe088ff278b2f1cfdb6182629b13b6fe60e80838b7fe1794b8a4a627e08ab5d;
    pk_srv = x25519_ref(sk_srv, 256'd9);

    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); puf_power_up = 1; @(negedge clk); puf_power_up = 0;

    issue(CMD_ENROLL);
    wait_idle(cyc_enroll);
    check(status == ST_DONE, "enroll status");
    check(outq.size() == ID_WORDS + HD_WORDS + KEY_WORDS, "enroll length");
    check({outq[1][15:0], outq[0]} == device_id, "ID");
    for (int i = 0; i < HD_WORDS; i++) hd[i] = outq[ID_WORDS + i];
    for (int i = 0; i < KEY_WORDS; i++) pk_id[i*32 +: 32] = outq[ID_WORDS + HD_WORDS + i];
    for (int i = 0; i < CERT_WORDS; i++)
      cert[i] = (i < ID_WORDS + HD_WORDS + KEY_WORDS) ? outq[i] : 32'h5160_0000 + i;
    outq.delete();
    w_srv = x25519_ref(sk_srv, pk_id);

    // ---- variant D ----
    issue(CMD_STORE_CERT);
    for (int i = 0; i < CERT_WORDS; i++) send(cert[i]);
    wait_idle(cyc_store);
    check(status == ST_DONE, "Cert_ID stored");
    issue(CMD_SEND_CERT);
    wait_idle(cyc_store);
    bad = 0;
    for (int i = 0; i < CERT_WORDS && i < outq.size(); i++) bad += int'(outq[i] != cert[i]);
    check(status == ST_DONE && outq.size() == CERT_WORDS && bad == 0, "Cert_ID sent on session request");
    outq.delete();
    @(negedge clk); puf_power_up = 1; @(negedge clk); puf_power_up = 0;
    issue(CMD_AGREE_CERT);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    wait_idle(cyc_agree_d);
    for (int i = 0; i < KEY_WORDS; i++) w_dev[i*32 +: 32] = outq[i];
    check(status == ST_DONE && outq.size() == KEY_WORDS && w_dev == w_srv,
          "variant D: shared secret matches the server's");
    outq.delete();

    // ---- variant A ----
    issue(CMD_STORE_PKTTP);
    for (int i = 0; i < KEY_WORDS; i++) send(32'h7770_0000 + i);
    wait_idle(cyc_store);
    check(status == ST_DONE, "PK_TTP stored");

    @(negedge clk); puf_power_up = 1; @(negedge clk); puf_power_up = 0;
    issue(CMD_AGREE);
    for (int i = 0; i < HD_WORDS; i++) send(hd[i]);
    for (int i = 0; i < KEY_WORDS; i++) send(pk_srv[i*32 +: 32]);
    wait_idle(cyc_agree);
    check(status == ST_DONE && outq.size() == KEY_WORDS, "agree status and length");
    for (int i = 0; i < KEY_WORDS; i++) w_dev[i*32 +: 32] = outq[i];
    check(w_dev == w_srv, "variant A: shared secret matches the server's");
    for (int i = 0; i < KEY_WORDS; i++) check(vf_pk_ttp[i*32 +: 32] == 32'h7770_0000 + i, "PK_TTP given to verifier");
    $display("enrollment %0d cycles, key agreement after the last input word: %0d cycles (A), %0d cycles (D); %0d bits corrected",
             cyc_enroll, cyc_agree, cyc_agree_d, puf_n_corrected);
    check(cyc_enroll > 57325 && cyc_enroll < 70000, "enrollment cycle count");
    check(cyc_agree > 57325 && cyc_agree < 70000, "agreement cycle count");
    check(cyc_agree_d > 57325 && cyc_agree_d < 70000, "variant D agreement cycle count");
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
