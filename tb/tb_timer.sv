// tb_timer: checks that the timestamp counts clocks while enabled, holds
// while disabled and restarts from zero on reset.
module tb_timer;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] ts;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  timer #(.TS_W(32)) dut (.clk, .rst_n, .en, .timestamp(ts));
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int n;
    repeat (2) @(negedge clk);
    check(ts == 0, "zero in reset");
    rst_n = 1; en = 1;
    for (int i = 1; i <= 50; i++) begin
      @(negedge clk);
      check(ts == 32'(i), $sformatf("count %0d got %0d", i, ts));
    end
    en = 0; n = ts;
    repeat (7) @(negedge clk);
    check(ts == 32'(n), "holds while disabled");
    en = 1; repeat (3) @(negedge clk);
    check(ts == 32'(n + 3), "resumes");
    rst_n = 0; @(negedge clk);
    check(ts == 0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
