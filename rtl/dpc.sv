// dpc: data path controller, an AXI4-Lite slave of the processing element.
//
// The PE issues each crypto instruction by writing a 16-bit control word
// (CWR) to offset 0x0. The CWR drives the custom bus interconnect addresses,
// its enable and the block enables (field layout in bc_pkg). Each write also
// raises cwr_strobe for one clock, the cue on which the blocks start the new
// instruction. Offset 0x4 reads the 32-bit status word of the auditor;
// offset 0x0 reads back the CWR. Other offsets read 0; writes to them are
// acknowledged and ignored. The register map and the strobe are this
// design's; the 16-bit CWR and its role are the paper's.
// Timing (two clocks, as the paper's path-controller figure): with AWVALID
// and WVALID high at edge t the slave raises AWREADY/WREADY for the clock
// after t; the handshake completes at edge t+1, where the CWR is loaded and
// BVALID raised; cwr_strobe is high during the clock after edge t+1.
// Reads: ARREADY the clock after ARVALID, RVALID with data the clock after.
// Write strobes: WSTRB[0] and WSTRB[1] guard CWR bytes 0 and 1.
module dpc
  import bc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [3:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [3:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // to the crypto and confidential areas
  output cwr_t        cwr,
  output logic        cwr_strobe,
  input  logic [31:0] status
);
  logic wr_fire, rd_fire;
  assign wr_fire = s_axil_awvalid && s_axil_awready && s_axil_wvalid && s_axil_wready;
  assign rd_fire = s_axil_arvalid && s_axil_arready;
  assign s_axil_bresp = 2'b00;
  assign s_axil_rresp = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cwr            <= '0;
      cwr_strobe     <= 1'b0;
      s_axil_awready <= 1'b0;
      s_axil_wready  <= 1'b0;
      s_axil_bvalid  <= 1'b0;
      s_axil_arready <= 1'b0;
      s_axil_rvalid  <= 1'b0;
      s_axil_rdata   <= '0;
    end else begin
      cwr_strobe <= 1'b0;
      // write channel: accept address and data together, one at a time
      s_axil_awready <= s_axil_awvalid && s_axil_wvalid && !s_axil_awready &&
                        !s_axil_bvalid;
      s_axil_wready  <= s_axil_awvalid && s_axil_wvalid && !s_axil_awready &&
                        !s_axil_bvalid;
      if (wr_fire) begin
        s_axil_awready <= 1'b0;
        s_axil_wready  <= 1'b0;
        s_axil_bvalid  <= 1'b1;
        if (s_axil_awaddr[3:2] == 2'd0) begin
          if (s_axil_wstrb[0]) cwr[7:0]  <= s_axil_wdata[7:0];
          if (s_axil_wstrb[1]) cwr[15:8] <= s_axil_wdata[15:8];
          cwr_strobe <= 1'b1;
        end
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      // read channel
      s_axil_arready <= s_axil_arvalid && !s_axil_arready && !s_axil_rvalid;
      if (rd_fire) begin
        s_axil_rvalid <= 1'b1;
        case (s_axil_araddr[3:2])
          2'd0:    s_axil_rdata <= {16'h0, cwr};
          2'd1:    s_axil_rdata <= status;
          default: s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: once raised, a response stays valid until accepted
  property p_hold(logic v, logic r);
    @(posedge clk) disable iff (!rst_n) (v && !r) |=> v;
  endproperty
  a_bvalid_hold: assert property (p_hold(s_axil_bvalid, s_axil_bready));
  a_rvalid_hold: assert property (p_hold(s_axil_rvalid, s_axil_rready));
endmodule
