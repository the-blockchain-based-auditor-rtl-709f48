// tb_bc_top: end-to-end test of the key auditor at its full size (1024-bit
// data and RSA keys), with the testbench playing the PE over AXI4-Lite, the
// RNG and the AES key port. It runs the key life cycle of one TLS session:
//   A  RNG makes a pre-master key; a signed write block stores it in the MKM
//   B  Hash reads the pre-master key (signed read block), derives the master
//      key from it and the PE's randoms, and writes it back (signed write block)
//   C  AES reads its copy of the master key; the key reaches the AES port
//   D  a forged AES request (signed with the RNG key) is refused
//   E  a second genuine AES request finds its copy erased
//   F  Hash reads its copy of the master key
// and checks every audit record (requestee, grant, digest against reference
// SHA3-512 values, the pre-hash chain), the keys delivered, the MKM state,
// and counts each mechanism: each interconnect path, signature grant and
// refusal, MKM write, read and erase, hash and RSA result replay.
module tb_bc_top;
  import bc_pkg::*;
  import tb_vec_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0;
  logic [3:0] awaddr = 0, araddr = 0, wstrb = 4'hF;
  logic awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic [31:0] wdata = 0, rdata;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  logic rng_en, rng_start, rng_done = 0, enc_en, en_key_rdy, log_valid;
  logic [W-1:0] rng_data = '0, en_key, log_sig;
  logic rsa_rekey_valid = 0, hash_rand_valid = 0;
  logic [HASH_W-1:0] hash_rand = '0;
  logic [W-1:0] rsa_rekey_n = '0, rsa_rekey_exp = '0;
  logic [W-1:0] pub_n [N_IP];
  logic [W-1:0] pub_e [N_IP];
  bc_log_t log_rec;

  bc_top dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .rng_en, .rng_start, .rng_data, .rng_done, .enc_en, .en_key, .en_key_rdy,
    .hash_rand_valid, .hash_rand, .rsa_rekey_valid, .rsa_rekey_n, .rsa_rekey_exp, .pub_n, .pub_e,
    .log_valid, .log_rec, .log_sig);

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters
  int n_path [4][5];
  int n_grant = 0, n_refuse = 0, n_mkm_wr = 0, n_mkm_rd = 0, n_erase = 0;
  int n_hash_replay = 0, n_rsa_replay = 0, n_rng = 0;
  logic kd_q = 0, rd_q = 0;    // engine done one clock earlier
  always @(posedge clk) if (rst_n) begin
    kd_q <= dut.u_hash.u_keccak.done;
    rd_q <= dut.u_pub.r_done;
    for (int k = 0; k < 5; k++)
      if (dut.u_cbi.out_valid[k] && dut.cwr.in_addr < 4) n_path[dut.cwr.in_addr[1:0]][k]++;
    if (dut.u_mkm.wr_en) n_mkm_wr++;
    if (dut.u_mkm.rd_en) n_mkm_rd++;
    if (dut.u_mkm.s1_hit && dut.u_mkm.s1_slot != 2'd0) n_erase++;
    if (dut.u_hash.hash_done && !kd_q) n_hash_replay++;
    if (dut.u_pub.pub_op_rdy && !rd_q) n_rsa_replay++;
  end

  // ---------------- audit log monitor
  bc_log_t logs [$];
  always @(posedge clk) if (rst_n && log_valid) begin
    logs.push_back(log_rec);
    if (log_rec.granted) n_grant++; else n_refuse++;
  end

  // ---------------- RNG model: fixed number R, five clocks after the request
  always @(posedge clk) if (rst_n && rng_start) begin
    n_rng++;
    repeat (5) @(posedge clk);
    rng_data <= W'(RNG_R); rng_done <= 1;
    @(posedge clk); rng_done <= 0;
  end

  // ---------------- AES key port monitor
  logic [W-1:0] last_en_key = '0; int n_en_key = 0;
  always @(posedge clk) if (rst_n && en_key_rdy) begin last_en_key = en_key; n_en_key++; end

  // ---------------- PE side
  task automatic axi_write(logic [3:0] a, logic [31:0] d);
    @(negedge clk); awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!bvalid);
    awvalid = 0; wvalid = 0;
    @(negedge clk);
  endtask
  task automatic axi_read(logic [3:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1;
    do @(negedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
  endtask
  task automatic instr(logic [15:0] code);
    axi_write(4'h0, {16'h0, code});
  endtask
  task automatic wait_status(int bitpos, logic val);
    logic [31:0] s;
    do axi_read(4'h4, s); while (s[bitpos] != val);
  endtask
  task automatic rekey(ip_id_t k, bit priv);
    @(negedge clk); rsa_rekey_valid = 1; rsa_rekey_n = KEY_N[k];
    rsa_rekey_exp = priv ? KEY_D[k] : KEY_E;
    @(negedge clk); rsa_rekey_valid = 0;
  endtask
  // signature of the block with key k (instr. 17-20); late = write 18/20 after
  // the core has finished instead of while it works
  task automatic sign(ip_id_t k, bit late);
    rekey(k, 1);
    instr(16'h1341);                               // 17: Buff -> Hash_in
    if (late) begin wait_status(10, 1); end
    instr(16'h2049);                               // 18: Hash -> Buff (digest)
    wait_status(18, 1);
    instr(16'h1461);                               // 19: Buff -> PubEn
    if (late) begin wait_status(12, 1); wait_status(13, 0); end
    instr(16'h3061);                               // 20: PubEn -> Buff (signature)
    wait_status(19, 1);
  endtask
  task automatic verify_blk();
    int n0 = logs.size();
    instr(16'h1003);                               // 21: verify
    while (logs.size() == n0) @(negedge clk);
    wait_status(20, 0);
  endtask
  task automatic check_log(int i, blk_op_t op, ip_id_t id, logic granted, logic [HASH_W-1:0] dig, string what);
    check(logs.size() > i, {what, ": record present"});
    if (logs.size() > i) begin
      check(logs[i].op == op && logs[i].requestee == id, {what, ": op and requestee"});
      check(logs[i].granted == granted, $sformatf("%s: granted %0b", what, logs[i].granted));
      check(logs[i].digest == dig, {what, ": digest"});
      check(logs[i].prehash == ((i == 0) ? '0 : logs[i-1].digest), {what, ": pre-hash chain"});
      if (i > 0) check(logs[i].timestamp > logs[i-1].timestamp, {what, ": timestamp grows"});
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] s;
    for (int i = 0; i < N_IP; i++) begin pub_n[i] = KEY_N[i]; pub_e[i] = KEY_E; end
    for (int i = 0; i < 4; i++) for (int k = 0; k < 5; k++) n_path[i][k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- A: pre-master key from the RNG into the MKM
    instr(16'h0050);                               // 2: Gen RND
    wait_status(17, 1);
    instr(16'h0091);                               // 3: RNG write block
    axi_read(4'h4, s);
    check(s[16] && s[9] == 0, "block open, MKM empty");
    sign(IP_RNG, 0);
    verify_blk();
    check_log(0, OP_WRITE, IP_RNG, 1, SHA_DIG[1], "A write pre-master");
    axi_read(4'h4, s);
    check(s[9] && !s[17], "pre-master in MKM, gone from buffer");

    // ---- B: Hash reads the pre-master key and writes the master key
    instr(16'h11C1);                               // 7: Hash read block
    sign(IP_HASH, 0);
    verify_blk();
    check_log(1, OP_READ, IP_HASH, 1, SHA_DIG[0], "B read pre-master");
    @(negedge clk); hash_rand_valid = 1; hash_rand = HASH_RAND_S;   // 6: PE sends randoms
    @(negedge clk); hash_rand_valid = 0;
    instr(16'h1149);                               // 8: Buff -> Hash_key
    wait_status(11, 1); wait_status(11, 0);
    instr(16'h2049);                               // 9: Hash -> Buff (keys)
    wait_status(17, 1);
    instr(16'h20C9);                               // 10: Hash write block
    sign(IP_HASH, 1);
    verify_blk();
    check_log(2, OP_WRITE, IP_HASH, 1, SHA_DIG[2], "B write master");
    axi_read(4'h4, s);
    check(s[9] && s[8] && s[7], "pre-master kept, both master copies stored");

    // ---- C: AES gets its key
    instr(16'h12C1);                               // 11: En read block
    sign(IP_AES, 0);
    verify_blk();
    check_log(3, OP_READ, IP_AES, 1, SHA_DIG[0], "C read by AES");
    instr(16'h1245);                               // 12: Buff -> En_key
    repeat (4) @(negedge clk);
    check(n_en_key == 1 && last_en_key == W'(MASTER_M), "AES receives the master key");
    axi_read(4'h4, s);
    check(!s[7] && s[8], "AES copy erased, Hash copy kept");

    // ---- D: forged AES request
    instr(16'h12C1);
    sign(IP_RNG, 0);
    verify_blk();
    check_log(4, OP_READ, IP_AES, 0, SHA_DIG[0], "D forged request");
    instr(16'h1245);
    repeat (4) @(negedge clk);
    check(n_en_key == 2 && last_en_key == '0, "no key for a refused request");

    // ---- E: genuine request after the key was read once
    instr(16'h12C1);
    sign(IP_AES, 0);
    verify_blk();
    check_log(5, OP_READ, IP_AES, 1, SHA_DIG[0], "E second AES read");
    instr(16'h1245);
    repeat (4) @(negedge clk);
    check(n_en_key == 3 && last_en_key == '0, "erased key is not released again");

    // ---- F: Hash reads its master key copy (instr. 14, 15)
    instr(16'h11C1);
    sign(IP_HASH, 0);
    verify_blk();
    check_log(6, OP_READ, IP_HASH, 1, SHA_DIG[0], "F hash read master");
    check(dut.u_buffer.data_q == W'(MASTER_M), "master key in the buffer");
    instr(16'h1149);
    repeat (4) @(negedge clk);
    axi_read(4'h4, s);
    check(!s[8] && s[9] && !s[17], "Hash copy erased, pre-master kept, buffer empty");

    // ---- the audit log never carries a key
    foreach (logs[i]) check(logs[i].digest != W'(MASTER_M) && logs[i].prehash != HASH_W'(RNG_R),
                            $sformatf("record %0d holds no key", i));

    // ---- mechanisms
    check(n_rng == 1, $sformatf("RNG generated %0d times", n_rng));
    check(n_path[0][0] > 0, "path RNG -> Buff");
    check(n_path[1][1] > 0, "path Buff -> Hash_key");
    check(n_path[1][2] > 0, "path Buff -> En_key");
    check(n_path[1][3] > 0, "path Buff -> Hash_in");
    check(n_path[1][4] > 0, "path Buff -> Pub_en_in");
    check(n_path[2][0] > 0, "path Hash -> Buff");
    check(n_path[3][0] > 0, "path PubEn -> Buff");
    check(n_grant == 6 && n_refuse == 1, $sformatf("grants %0d refusals %0d", n_grant, n_refuse));
    check(n_mkm_wr == 2, $sformatf("MKM writes %0d", n_mkm_wr));
    check(n_mkm_rd == 4, $sformatf("MKM reads %0d", n_mkm_rd));
    check(n_erase == 2, $sformatf("MKM erasures %0d", n_erase));
    check(n_hash_replay > 0, $sformatf("hash result replays %0d", n_hash_replay));
    check(n_rsa_replay > 0, $sformatf("RSA result replays %0d", n_rsa_replay));
    $display("mechanisms: rng=%0d grants=%0d refusals=%0d mkm_wr=%0d mkm_rd=%0d erase=%0d hash_replay=%0d rsa_replay=%0d",
             n_rng, n_grant, n_refuse, n_mkm_wr, n_mkm_rd, n_erase, n_hash_replay, n_rsa_replay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
