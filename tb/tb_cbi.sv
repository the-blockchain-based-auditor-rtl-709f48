// tb_cbi: drives random data and strobes on all four sources and checks, for
// every address pair and with the bus disabled, that exactly the selected
// destination receives the selected source one clock later.
module tb_cbi;
  localparam int unsigned W = 64;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] in_addr = 0, out_addr = 0;
  logic [W-1:0] in_data [4];
  logic in_valid [4];
  logic [W-1:0] out_data [5];
  logic out_valid [5];
  logic [W-1:0] exp_data [5];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cbi #(.DATA_W(W), .N_IN(4), .N_OUT(5)) dut (.clk, .rst_n, .en, .in_addr, .out_addr,
    .in_data, .in_valid, .out_data, .out_valid);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic sent_v; logic [W-1:0] sent_d; int routed;
    for (int i = 0; i < 4; i++) begin in_data[i] = '0; in_valid[i] = 0; end
    for (int k = 0; k < 5; k++) exp_data[k] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 300; rep++) begin
      en = ($urandom % 5) != 0;
      in_addr = 4'($urandom % 6);     // 4 and 5 route nothing
      out_addr = 4'($urandom % 7);    // 5 and 6 route nothing
      for (int i = 0; i < 4; i++) begin
        in_data[i] = {$urandom, $urandom};
        in_valid[i] = $urandom % 2;
      end
      sent_v = (in_addr < 4) ? in_valid[in_addr] : 1'b0;
      sent_d = (in_addr < 4) ? in_data[in_addr] : '0;
      @(negedge clk);
      routed = 0;
      for (int k = 0; k < 5; k++) begin
        automatic logic want = en && sent_v && (out_addr == 4'(k));
        if (want) begin exp_data[k] = sent_d; routed++; end
        check(out_valid[k] == want, $sformatf("rep %0d out %0d valid %0b want %0b", rep, k, out_valid[k], want));
        check(out_data[k] == exp_data[k], $sformatf("rep %0d out %0d data", rep, k));
      end
    end
    // strobe crosses in exactly one clock
    en = 1; in_addr = 2; out_addr = 3;
    for (int i = 0; i < 4; i++) in_valid[i] = 0;
    @(negedge clk); in_valid[2] = 1; in_data[2] = 64'hA5A5;
    #1 check(!out_valid[3], "not combinational");
    @(negedge clk); in_valid[2] = 0;
    check(out_valid[3] && out_data[3] == 64'hA5A5, "one clock through the interconnect");
    @(negedge clk); check(!out_valid[3], "strobe lasts one clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
