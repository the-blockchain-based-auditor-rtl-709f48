// cbi: custom bus interconnect (the "junction" between crypto cores and buffer).
//
// A multiplexer picks one of N_IN sources (data plus its done/ready strobe)
// by in_addr and a demultiplexer hands it to one of N_OUT destinations by
// out_addr. Sources: 0 RNG_op/RNG_done, 1 Buff/Buff_rd, 2 Hash_op/Hash_done,
// 3 pub_op/pub_op_rdy. Destinations: 0 Buff/Buff_wr, 1 Hash_key/Hash_key_rdy,
// 2 En_key/En_key_rdy, 3 Hash_in/Hash_in_rdy, 4 pub_en_in/pub_en_in_rdy.
// These names and indices are the paper's. The path is closed while en
// (the CWR "Bus sel" bit) is low, or when an address is out of range.
// Timing: outputs are registered, so a strobe crosses in one clock (this
// register is this design's choice). A destination's data register only
// changes when a strobe is delivered to it.
module cbi #(
  parameter int unsigned DATA_W = 1024,
  parameter int unsigned N_IN   = 4,
  parameter int unsigned N_OUT  = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [3:0]        in_addr,
  input  logic [3:0]        out_addr,
  input  logic [DATA_W-1:0] in_data  [N_IN],
  input  logic              in_valid [N_IN],
  output logic [DATA_W-1:0] out_data [N_OUT],
  output logic              out_valid[N_OUT]
);
  logic [DATA_W-1:0] mux_data;
  logic              mux_valid;

  // MUX
  always_comb begin
    mux_data  = '0;
    mux_valid = 1'b0;
    for (int unsigned i = 0; i < N_IN; i++) begin
      if (in_addr == 4'(i)) begin
        mux_data  = in_data[i];
        mux_valid = in_valid[i];
      end
    end
  end

  // DEMUX, registered
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < N_OUT; k++) begin
        out_valid[k] <= 1'b0;
        out_data[k]  <= '0;
      end
    end else begin
      for (int unsigned k = 0; k < N_OUT; k++) begin
        out_valid[k] <= en && mux_valid && (out_addr == 4'(k));
        if (en && mux_valid && (out_addr == 4'(k)))
          out_data[k] <= mux_data;
      end
    end
  end
endmodule
