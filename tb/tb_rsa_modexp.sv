// tb_rsa_modexp: checks RSA-1024 exponentiation against reference values
// (signature with a private key, verification with the public key) and a
// right-to-left reference exponentiation, and the 3*KEY_W clock latency.
module tb_rsa_modexp;
  import tb_vec_pkg::*;
  localparam int unsigned W = 1024;
  logic clk = 0, rst_n = 0, start = 0;
  logic [W-1:0] base = '0, exp = '0, modulus = '0, result;
  logic busy, done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rsa_modexp #(.KEY_W(W)) dut (.clk, .rst_n, .start, .base, .exp, .modulus, .busy, .done, .result);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // right-to-left binary exponentiation, a different order from the DUT
  function automatic logic [W-1:0] ref_pow(logic [W-1:0] b, logic [W-1:0] e, logic [W-1:0] n);
    logic [2*W-1:0] r = 1, x = {{W{1'b0}}, b} % {{W{1'b0}}, n};
    for (int i = 0; i < W; i++) begin
      if (e[i]) r = (r * x) % {{W{1'b0}}, n};
      x = (x * x) % {{W{1'b0}}, n};
    end
    return W'(r % {{W{1'b0}}, n});
  endfunction

  task automatic run(logic [W-1:0] b, logic [W-1:0] e, logic [W-1:0] n, logic [W-1:0] want, string what);
    int cyc;
    @(negedge clk);
    base = b; exp = e; modulus = n; start = 1;
    @(negedge clk);
    start = 0; base = ~b;   // operands are latched at start
    cyc = 0;   // clocks after the edge that sampled start
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 3*W, $sformatf("%s: latency %0d, expected %0d", what, cyc, 3*W));
    check(result === want, $sformatf("%s: result mismatch", what));
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] b, e;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(W'(SHA_DIG[1]), KEY_D[0], KEY_N[0], SIG_R_RNG, "sign");
    run(SIG_R_RNG, KEY_E, KEY_N[0], W'(SHA_DIG[1]), "verify");
    for (int k = 0; k < 3; k++) begin
      b = '0; e = '0;
      for (int j = 0; j < W/32; j++) begin
        b[32*j +: 32] = $urandom;
        if (j < 2) e[32*j +: 32] = $urandom;
      end
      run(b, e, KEY_N[k], ref_pow(b, e, KEY_N[k]), $sformatf("random %0d", k));
    end
    // round trip for each key pair: (m^d)^e = m
    for (int k = 0; k < NK; k++) begin
      b = W'(SHA_DIG[k]);
      run(b, KEY_D[k], KEY_N[k], ref_pow(b, KEY_D[k], KEY_N[k]), $sformatf("sign key %0d", k));
      run(result, KEY_E, KEY_N[k], b, $sformatf("round trip key %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
