// tb_sig_checker: checks grant and refusal of signed requests against
// reference signatures: correct key, wrong requestee key, tampered data,
// a read whose destination owns no key; also the requestee choice (writer
// for a write, reader for a read), the digest, the pre-hash chain and the
// latency of 3*KEY_W+1 clocks.
module tb_sig_checker;
  import bc_pkg::*;
  import tb_vec_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0, start = 0;
  logic [HASH_W-1:0] data = '0, digest, prehash;
  logic [W-1:0] sig = '0;
  blk_op_t op = OP_WRITE;
  logic [3:0] src = 0, dst = 0;
  logic [W-1:0] pub_n [N_IP];
  logic [W-1:0] pub_e [N_IP];
  logic busy, done, grant;
  ip_id_t requestee;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sig_checker #(.KEY_W(W)) dut (.clk, .rst_n, .start, .data, .sig, .op, .src, .dst, .pub_n, .pub_e,
    .busy, .done, .grant, .requestee, .digest, .prehash);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic verify(blk_op_t o, logic [3:0] s, logic [3:0] d, logic [HASH_W-1:0] m,
                        logic [W-1:0] sg, logic want_grant, ip_id_t want_id,
                        logic [HASH_W-1:0] want_dig, string what);
    int c;
    @(negedge clk); op = o; src = s; dst = d; data = m; sig = sg; start = 1;
    @(negedge clk); start = 0;
    c = 0;
    while (!done) begin @(negedge clk); c++; end
    check(c == 3*W + 1, $sformatf("%s: latency %0d", what, c));
    check(grant == want_grant, $sformatf("%s: grant %0b", what, grant));
    check(requestee == want_id, $sformatf("%s: requestee %0d", what, requestee));
    check(digest == want_dig, {what, ": digest"});
    check(prehash == want_dig, {what, ": pre-hash follows the checked block"});
    @(negedge clk);
    check(!done && !busy, {what, ": done pulse"});
  endtask
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < N_IP; i++) begin pub_n[i] = KEY_N[i]; pub_e[i] = KEY_E; end
    repeat (2) @(negedge clk); rst_n = 1;
    check(prehash == '0, "genesis pre-hash is zero");
    verify(OP_WRITE, IN_RNG, OUT_BUFF, SHA_MSG[1], SIG_R_RNG, 1, IP_RNG, SHA_DIG[1], "RNG write, RNG key");
    verify(OP_WRITE, IN_HASH, OUT_BUFF, SHA_MSG[1], SIG_R_RNG, 0, IP_HASH, SHA_DIG[1], "claimed by Hash");
    verify(OP_WRITE, IN_RNG, OUT_BUFF, SHA_MSG[3], SIG_R_RNG, 0, IP_RNG, SHA_DIG[3], "tampered data");
    verify(OP_WRITE, IN_RNG, OUT_BUFF, SHA_MSG[1], SIG_R_RNG ^ 1, 0, IP_RNG, SHA_DIG[1], "tampered signature");
    // give the Hash and AES entries the RNG key: requestee selection is then visible
    pub_n[IP_HASH] = KEY_N[0]; pub_n[IP_AES] = KEY_N[0];
    verify(OP_READ, IN_BUFF, OUT_HASH_KEY, SHA_MSG[1], SIG_R_RNG, 1, IP_HASH, SHA_DIG[1], "read by Hash");
    verify(OP_READ, IN_BUFF, OUT_EN_KEY, SHA_MSG[1], SIG_R_RNG, 1, IP_AES, SHA_DIG[1], "read by AES");
    verify(OP_READ, IN_BUFF, OUT_BUFF, SHA_MSG[1], SIG_R_RNG, 0, IP_HASH, SHA_DIG[1], "read by Buff (no key)");
    verify(OP_WRITE, IN_PUBEN, OUT_BUFF, SHA_MSG[1], SIG_R_RNG, 0, IP_RSA, SHA_DIG[1], "write by PubEn, its own key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
