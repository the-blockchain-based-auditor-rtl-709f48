// tb_buffer: plays the PE (control words), the interconnect, the signature
// checker and the MKM around the buffer. Checks header capture at block
// generation, the field each source writes (data, digest, signature) and
// each destination reads, the read-out timing, key erasure after delivery,
// a granted write (MKM write, key leaves the buffer), a granted read (MKM
// read fills the data), a refused request (block discarded, no MKM access)
// and the audit record of each check.
module tb_buffer;
  import bc_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0, cwr_strobe = 0, buff_wr = 0;
  cwr_t cwr = '0;
  logic [TS_W-1:0] timestamp = 0;
  logic [HASH_W-1:0] prehash = '0, sc_data, sc_digest = '0;
  logic [STAT_W-1:0] status = '0;
  logic [W-1:0] buff_in = '0, buff_op, sc_sig, mkm_wr_data, mkm_rd_data = '0, log_sig;
  logic buff_done, sc_start, sc_done = 0, sc_grant = 0, mkm_wr_en, mkm_rd_en;
  logic mkm_rd_valid = 0, mkm_rd_hit = 0, log_valid;
  logic blk_valid, data_valid, digest_valid, sig_valid, busy;
  blk_op_t sc_op;
  ip_id_t sc_requestee = IP_RNG;
  logic [3:0] sc_src, sc_dst, mkm_wr_src, mkm_rd_dst;
  bc_log_t log_rec;
  int checks = 0, failures = 0, n_wr = 0, n_rd = 0, n_log = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (mkm_wr_en) n_wr++;
    if (mkm_rd_en) n_rd++;
    if (log_valid) n_log++;
  end
  buffer #(.DATA_W(W), .KEY_W(W)) dut (.clk, .rst_n, .cwr, .cwr_strobe, .timestamp, .prehash, .status,
    .buff_in, .buff_wr, .buff_op, .buff_done, .sc_start, .sc_data, .sc_sig, .sc_op, .sc_src, .sc_dst,
    .sc_done, .sc_grant, .sc_requestee, .sc_digest, .mkm_wr_en, .mkm_wr_src, .mkm_wr_data,
    .mkm_rd_en, .mkm_rd_dst, .mkm_rd_valid, .mkm_rd_data, .mkm_rd_hit, .log_valid, .log_rec, .log_sig,
    .blk_valid, .data_valid, .digest_valid, .sig_valid, .busy);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic instr(logic [15:0] code);
    @(negedge clk); cwr = code; cwr_strobe = 1;
    @(negedge clk); cwr_strobe = 0;
  endtask
  task automatic arrive(logic [W-1:0] d);     // data from the interconnect
    @(negedge clk); buff_in = d; buff_wr = 1;
    @(negedge clk); buff_wr = 0;
  endtask
  // read-out: returns what leaves, checks the clock it leaves on
  task automatic readout(logic [15:0] code, output logic [W-1:0] d);
    int c;
    @(negedge clk); cwr = code; cwr_strobe = 1;
    @(negedge clk); cwr_strobe = 0;
    c = 0;
    while (!buff_done && c < 10) begin @(negedge clk); c++; end
    check(c == 1, $sformatf("read-out %h: buff_done %0d clocks after the strobe clock", code, c));
    d = buff_op;
  endtask
  // verify: plays the checker; returns after the log record
  task automatic verify(logic grant, logic [HASH_W-1:0] dig, ip_id_t id);
    int c;
    @(negedge clk); cwr = 16'h1003; cwr_strobe = 1;
    @(negedge clk); cwr_strobe = 0;
    check(sc_start && busy, "checker started the clock after the strobe");
    repeat (20) @(negedge clk);
    sc_done = 1; sc_grant = grant; sc_digest = dig; sc_requestee = id;
    @(negedge clk); sc_done = 0;
    check(log_valid, "log record the clock after the check");
    @(negedge clk);
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [W-1:0] d1, k1, sg, x, r;
    logic [HASH_W-1:0] p1, hx;
    d1 = {32{$urandom}}; k1 = {32{$urandom}}; sg = {32{$urandom}}; hx = {16{$urandom}};
    p1 = {16{$urandom}};
    repeat (2) @(negedge clk); rst_n = 1;
    // ---- write of a pre-master key by the RNG (instr. 2, 3, 17-21)
    instr(16'h0050); arrive(d1);
    check(data_valid && !blk_valid, "RNG data stored with Buff bit clear");
    timestamp = 32'd777; prehash = p1; status = 16'hA5C3;
    instr(16'h0091);
    timestamp = 32'd0; prehash = '0; status = '0;     // captured, not live
    check(blk_valid && sc_op == OP_WRITE && sc_src == IN_RNG && sc_dst == OUT_BUFF, "write block header");
    readout(16'h1341, x);
    check(x == d1, "Hash_in receives the data");
    check(data_valid, "data kept for the signature");
    @(negedge clk); cwr = 16'h2049; buff_in = W'(hx); buff_wr = 1; @(negedge clk); buff_wr = 0;
    check(digest_valid && sc_data == d1[HASH_W-1:0], "hash result taken as digest, data unchanged");
    readout(16'h1461, x);
    check(x == W'(hx), "Pub_en_in receives the digest");
    @(negedge clk); cwr = 16'h3061; buff_in = sg; buff_wr = 1; @(negedge clk); buff_wr = 0;
    check(sig_valid && sc_sig == sg, "PubEn result taken as signature");
    verify(1, hx, IP_RNG);
    check(log_rec.timestamp == 32'd777 && log_rec.prehash == p1 && log_rec.status == 16'hA5C3,
          "log: timestamp, pre-hash, status");
    check(log_rec.op == OP_WRITE && log_rec.src == IN_RNG && log_rec.dst == OUT_BUFF &&
          log_rec.requestee == IP_RNG, "log: op, addresses, requestee");
    check(log_rec.granted && log_rec.digest == hx && log_sig == sg, "log: grant, digest, signature");
    check(n_wr == 1 && mkm_wr_data == d1 && mkm_wr_src == IN_RNG, "granted write stored in MKM");
    check(!data_valid && !blk_valid && !sig_valid && !digest_valid, "key leaves the buffer, block closed");
    // ---- read by Hash (instr. 7, 17-21, 8, 9)
    instr(16'h0050); arrive(~d1);          // stale data is cleared by a read block
    instr(16'h11C1);
    check(sc_op == OP_READ && sc_dst == OUT_HASH_KEY && !data_valid && sc_data == '0, "read block header, data cleared");
    verify(1, hx, IP_HASH);
    check(n_rd == 1 && mkm_rd_dst == OUT_HASH_KEY && busy, "granted read asks the MKM");
    @(negedge clk); mkm_rd_valid = 1; mkm_rd_hit = 1; mkm_rd_data = k1;
    @(negedge clk); mkm_rd_valid = 0;
    check(data_valid && !busy && sc_data == k1[HASH_W-1:0], "MKM key loaded into the buffer");
    readout(16'h1149, x);
    check(x == k1, "Hash_key receives the key");
    check(!data_valid, "key erased after delivery");
    readout(16'h1245, x);
    check(x == '0, "nothing left for En_key");
    @(negedge clk); cwr = 16'h2049; buff_in = k1 ^ d1; buff_wr = 1; @(negedge clk); buff_wr = 0;
    check(data_valid && !digest_valid && sc_data == HASH_W'(k1 ^ d1), "hash result without a pending signature is data");
    // ---- refused write
    instr(16'h20C9);
    check(sc_op == OP_WRITE && sc_src == IN_HASH, "Hash write header");
    verify(0, hx, IP_HASH);
    check(!log_rec.granted && n_wr == 1 && n_rd == 1, "refused: no MKM access");
    check(!data_valid && !blk_valid, "refused: block discarded");
    check(n_log == 3, "one record per check");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
