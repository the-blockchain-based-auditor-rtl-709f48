// tb_pub_en: loads the RNG's private key, signs a digest and checks the
// result against the reference signature, the 3*KEY_W+1 latency, replay on
// a new instruction with the RSA bit, and that a re-key while busy is ignored.
module tb_pub_en;
  import tb_vec_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0, cwr_strobe = 0, en_rsa = 0, rekey_valid = 0, pub_en_in_rdy = 0;
  logic [W-1:0] rekey_n = '0, rekey_exp = '0, pub_en_in = '0, pub_op;
  logic pub_op_rdy, busy, valid;
  int checks = 0, failures = 0, rdys = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && pub_op_rdy) rdys++;
  pub_en #(.KEY_W(W)) dut (.clk, .rst_n, .cwr_strobe, .en_rsa, .rekey_valid, .rekey_n, .rekey_exp,
    .pub_en_in, .pub_en_in_rdy, .pub_op, .pub_op_rdy, .busy, .valid);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic rekey(logic [W-1:0] n, logic [W-1:0] e);
    @(negedge clk); rekey_valid = 1; rekey_n = n; rekey_exp = e;
    @(negedge clk); rekey_valid = 0;
  endtask
  task automatic run(logic [W-1:0] m, logic [W-1:0] want, string what, bit rekey_mid);
    int c;
    @(negedge clk); pub_en_in = m; pub_en_in_rdy = 1;
    @(negedge clk); pub_en_in_rdy = 0;
    c = 0;
    while (!pub_op_rdy) begin
      @(negedge clk); c++;
      if (rekey_mid && c == 10) begin rekey_valid = 1; rekey_n = KEY_N[2]; rekey_exp = KEY_D[2]; end
      if (c == 11) rekey_valid = 0;
    end
    check(c == 3*W + 1, $sformatf("%s: latency %0d", what, c));
    check(pub_op == want, {what, ": result"});
  endtask
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int r0;
    repeat (2) @(negedge clk); rst_n = 1;
    rekey(KEY_N[0], KEY_D[0]);
    run(W'(SHA_DIG[1]), SIG_R_RNG, "sign", 1);   // re-key attempt while busy
    run(W'(SHA_DIG[1]), SIG_R_RNG, "re-key while busy was ignored", 0);
    rekey(KEY_N[0], KEY_E);
    run(SIG_R_RNG, W'(SHA_DIG[1]), "public exponent undoes the signature", 0);
    @(negedge clk);
    r0 = rdys;
    @(negedge clk); cwr_strobe = 1; en_rsa = 1; @(negedge clk); cwr_strobe = 0;
    @(negedge clk);
    check(rdys == r0 + 1, $sformatf("replay with RSA bit: %0d pulses", rdys - r0));
    check(pub_op == W'(SHA_DIG[1]), "replayed result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
