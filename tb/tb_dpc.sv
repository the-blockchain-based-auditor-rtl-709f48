// tb_dpc: writes the instruction codes of the design to the control word
// register over AXI4-Lite and checks the decoded fields, the two-clock
// path from AWVALID/WVALID to the new control word, the one-clock strobe,
// byte strobes, read-back of CWR and status, and writes to other offsets.
module tb_dpc;
  import bc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] awaddr = 0, araddr = 0, wstrb = 0;
  logic awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic [31:0] wdata = 0, rdata, status = 32'h1234_5678;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  cwr_t cwr;
  logic cwr_strobe;
  int checks = 0, failures = 0, strobes = 0;
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && cwr_strobe) strobes++;
  dpc dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cwr, .cwr_strobe, .status);
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // write; returns the clocks from valid to the control word taking the value
  task automatic axi_write(logic [3:0] a, logic [31:0] d, logic [3:0] s, output int lat);
    @(negedge clk); awaddr = a; wdata = d; wstrb = s; awvalid = 1; wvalid = 1;
    lat = 0;
    do begin @(negedge clk); lat++; end while (!(bvalid));
    awvalid = 0; wvalid = 0;
    @(negedge clk);
  endtask
  task automatic axi_read(logic [3:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1;
    do @(negedge clk); while (!arready);
    @(negedge clk);          // handshake on the edge between
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
  endtask
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    // instruction codes of the design and their decoded fields
    static logic [15:0] code [12] = '{16'h0010, 16'h0050, 16'h0091, 16'h11C1, 16'h1149, 16'h2049,
                                      16'h20C9, 16'h12C1, 16'h1245, 16'h1341, 16'h1461, 16'h3061};
    int lat, s0; logic [31:0] r;
    repeat (2) @(negedge clk); rst_n = 1;
    check(cwr == 16'h0, "CWR clear after reset");
    for (int i = 0; i < 12; i++) begin
      s0 = strobes;
      fork
        axi_write(4'h0, {16'hDEAD, code[i]}, 4'hF, lat);
        begin
          automatic int c = 0;
          @(negedge clk);
          while (cwr != code[i] && c < 20) begin @(negedge clk); c++; end
          check(c == 2, $sformatf("code %h: CWR after %0d clocks, expected 2", code[i], c));
        end
      join
      check(strobes == s0 + 1, $sformatf("code %h: one strobe", code[i]));
      check(cwr.in_addr == code[i][15:12] && cwr.out_addr == code[i][11:8], "addresses");
      check(cwr.buf_cap == code[i][7] && cwr.bus_sel == code[i][6], "Buf cap / Bus sel");
      check({cwr.en_rsa, cwr.en_rng, cwr.en_hash, cwr.en_enc, cwr.en_mkm, cwr.en_buff} == code[i][5:0], "enables");
      check(bresp == 2'b00, "OKAY response");
    end
    // specific decodes
    check(cwr.in_addr == IN_PUBEN && cwr.out_addr == OUT_BUFF && cwr.en_rsa && cwr.bus_sel, "3061 = PubEn to Buff");
    axi_write(4'h0, 32'h0000_1003, 4'h1, lat);        // only byte 0
    check(cwr == 16'h3003, "byte strobe keeps byte 1");
    s0 = strobes;
    axi_write(4'h8, 32'h0000_FFFF, 4'hF, lat);
    check(cwr == 16'h3003 && strobes == s0, "other offset ignored");
    axi_read(4'h0, r); check(r == 32'h0000_3003, "read back CWR");
    axi_read(4'h4, r); check(r == 32'h1234_5678, "read status");
    status = 32'hCAFE_0001;
    axi_read(4'h4, r); check(r == 32'hCAFE_0001, "status is live");
    axi_read(4'hC, r); check(r == 0, "unmapped reads zero");
    // a response held until accepted
    bready = 0;
    @(negedge clk); awaddr = 0; wdata = 32'h0050; wstrb = 4'hF; awvalid = 1; wvalid = 1;
    repeat (3) @(negedge clk); awvalid = 0; wvalid = 0;
    repeat (3) @(negedge clk);
    check(bvalid, "BVALID held while BREADY low");
    bready = 1; @(negedge clk); @(negedge clk);
    check(!bvalid && cwr == 16'h0050, "response accepted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
