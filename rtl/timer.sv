// timer: timestamp source for block headers.
//
// A free-running count of clock cycles since reset, TS_W bits wide, that
// wraps around. The buffer copies it into each block it generates. The
// paper's timer IP is only named; counting clocks is this design's choice.
// Timing: timestamp increments on every rising clock edge while en is high.
module timer #(
  parameter int unsigned TS_W = 32
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            en,
  output logic [TS_W-1:0] timestamp
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  timestamp <= '0;
    else if (en) timestamp <= timestamp + 1'b1;
  end
endmodule
