// tb_mkm: checks slot selection, the two-clock read latency, erase-on-read
// of master key copies and the persistence of the pre-master key.
module tb_mkm;
  import bc_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0;
  logic [3:0] wr_src = 0, rd_dst = 0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic rd_valid, rd_hit, pm_valid, hk_valid, ek_valid;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mkm #(.DATA_W(W)) dut (.clk, .rst_n, .wr_en, .wr_src, .wr_data, .rd_en, .rd_dst,
    .rd_valid, .rd_data, .rd_hit, .pm_valid, .hk_valid, .ek_valid);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic wr(logic [3:0] src, logic [W-1:0] d);
    @(negedge clk); wr_en = 1; wr_src = src; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic rd(logic [3:0] dst, logic hit, logic [W-1:0] d, string what);
    @(negedge clk); rd_en = 1; rd_dst = dst;
    @(negedge clk); rd_en = 0;
    check(!rd_valid, {what, ": not after one clock"});
    @(negedge clk);
    check(rd_valid, {what, ": valid after two clocks"});
    check(rd_hit == hit, {what, ": hit"});
    check(rd_data == d, {what, ": data"});
  endtask
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [W-1:0] pm, mk;
    pm = {32{$urandom}}; mk = {32{$urandom}} ^ {W{1'b1}};
    repeat (2) @(negedge clk); rst_n = 1;
    check(!pm_valid && !hk_valid && !ek_valid, "empty after reset");
    rd(OUT_EN_KEY, 0, '0, "empty AES read");
    rd(OUT_HASH_KEY, 0, '0, "empty hash read");
    wr(IN_RNG, pm);
    check(pm_valid && !hk_valid, "pre-master stored");
    rd(OUT_HASH_KEY, 1, pm, "hash reads pre-master");
    check(pm_valid, "pre-master kept after read");
    rd(OUT_HASH_KEY, 1, pm, "pre-master read again");
    rd(OUT_EN_KEY, 0, '0, "AES gets no pre-master");
    wr(IN_HASH, mk);
    check(hk_valid && ek_valid, "master copies stored");
    rd(OUT_EN_KEY, 1, mk, "AES reads master");
    check(!ek_valid && hk_valid, "AES copy erased");
    rd(OUT_EN_KEY, 0, '0, "AES copy gone");
    rd(OUT_HASH_IN, 1, mk, "hash reads master copy");
    check(!hk_valid, "hash copy erased");
    rd(OUT_HASH_KEY, 1, pm, "hash falls back to pre-master");
    rd(OUT_BUFF, 0, '0, "no slot for Buff");
    wr(IN_PUBEN, mk);
    check(!hk_valid && !ek_valid, "PubEn cannot write keys");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
