// tb_hash_core: checks that data on Hash_in and on Hash_key are hashed
// (SHA3-512 reference values; a key is XORed with the PE's randoms first),
// the 25-clock strobe-to-done latency, the replay of hash_done on a new
// instruction with the HASH bit, and that arrivals while busy are dropped.
module tb_hash_core;
  import tb_vec_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0, cwr_strobe = 0, en_hash = 0;
  logic [W-1:0] hash_in = '0, hash_key = '0, hash_op;
  logic rand_valid = 0; logic [511:0] rand_in = '0;
  logic hash_in_rdy = 0, hash_key_rdy = 0, hash_done, busy, valid;
  int checks = 0, failures = 0, dones = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && hash_done) dones++;
  hash_core #(.DATA_W(W)) dut (.clk, .rst_n, .cwr_strobe, .en_hash, .hash_in, .hash_in_rdy,
    .hash_key, .hash_key_rdy, .rand_valid, .rand_in, .hash_op, .hash_done, .busy, .valid);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send(bit key, logic [W-1:0] d, int v);
    int c;
    @(negedge clk);
    if (key) begin hash_key = d; hash_key_rdy = 1; end
    else     begin hash_in = d;  hash_in_rdy = 1;  end
    @(negedge clk); hash_key_rdy = 0; hash_in_rdy = 0;
    c = 0;
    while (!hash_done) begin
      @(negedge clk); c++;
      if (c == 5) begin hash_in = ~d; hash_in_rdy = 1; end   // dropped: busy
      if (c == 6) hash_in_rdy = 0;
    end
    check(c == 25, $sformatf("vector %0d: done %0d clocks after the edge, expected 25", v, c));
    check(hash_op == W'(SHA_DIG[v]), $sformatf("vector %0d digest", v));
    @(negedge clk);
    check(!hash_done && valid && !busy, "single done pulse, digest held");
  endtask
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int d0;
    repeat (2) @(negedge clk); rst_n = 1;
    check(!valid, "no digest after reset");
    // no replay before any digest exists
    @(negedge clk); cwr_strobe = 1; en_hash = 1; @(negedge clk); cwr_strobe = 0;
    @(negedge clk); check(dones == 0, "no done without a digest");
    send(0, {512'h0, SHA_MSG[1]}, 1);
    send(1, {{512{1'b1}}, SHA_MSG[2]}, 2);     // upper bits are not hashed
    send(0, {512'h0, SHA_MSG[3]}, 3);
    // key path mixes in the randoms: key ^ rand = SHA_MSG[4]
    @(negedge clk); rand_valid = 1; rand_in = SHA_MSG[4] ^ SHA_MSG[0] ^ SHA_MSG[2];
    @(negedge clk); rand_valid = 0;
    send(1, {512'h0, SHA_MSG[0] ^ SHA_MSG[2]}, 4);
    send(0, {512'h0, SHA_MSG[3]}, 3);          // Hash_in ignores the randoms
    // replay on a new instruction with HASH enabled
    d0 = dones;
    @(negedge clk); cwr_strobe = 1; en_hash = 1; @(negedge clk); cwr_strobe = 0;
    @(negedge clk);
    check(dones == d0 + 1 && hash_op == W'(SHA_DIG[3]), "replay with HASH bit");
    @(negedge clk); cwr_strobe = 1; en_hash = 0; @(negedge clk); cwr_strobe = 0;
    @(negedge clk);
    check(dones == d0 + 1, "no replay without HASH bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
