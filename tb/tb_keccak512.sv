// tb_keccak512: checks SHA3-512 digests against independent reference values
// and the 24-clock latency; also checks that start is ignored while busy.
module tb_keccak512;
  import tb_vec_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [511:0] msg = '0, digest;
  logic busy, done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  keccak512 dut (.clk, .rst_n, .start, .msg, .busy, .done, .digest);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      @(negedge clk);
      msg = SHA_MSG[v]; start = 1;
      @(negedge clk);
      start = 0; msg = ~SHA_MSG[v];        // a start while busy must be ignored
      start = 1;
      cyc = 0;   // clocks after the edge that sampled start
      while (!done) begin @(negedge clk); start = 0; cyc++; end
      check(cyc == 24, $sformatf("vector %0d latency %0d, expected 24", v, cyc));
      check(digest === SHA_DIG[v], $sformatf("vector %0d digest %h", v, digest));
      @(negedge clk);
      check(!done && !busy, "done is a single pulse");
      check(digest === SHA_DIG[v], "digest held after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
