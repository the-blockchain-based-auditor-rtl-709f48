// mkm: master key memory, the isolated secret-key store of the confidential area.
//
// Only the buffer reaches it, and only after the signature checker has
// granted the transaction. Three slots: the pre-master key (written by the
// RNG), and two copies of the master key (written by the hash core), one for
// the hash core and one for the AES core. A key that is read is erased
// (zeroised), except the pre-master key. A write from the RNG fills the
// pre-master slot; a write from the hash core fills both master slots. A read
// for Hash_key/Hash_in returns the hash copy if present, else the pre-master
// key; a read for En_key returns the AES copy. Anything else, or an empty
// slot, returns zero with rd_hit low.
// The paper gives the MKM's role, its erase-after-read rule and its two-clock
// access; the slot layout is this design's.
// Timing: rd_en sampled at edge t; rd_valid, rd_data and rd_hit are valid
// during the clock after edge t+1 (two clocks). A write takes effect at the
// edge where wr_en is sampled.
module mkm
  import bc_pkg::*;
#(
  parameter int unsigned DATA_W = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [3:0]        wr_src,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [3:0]        rd_dst,
  output logic              rd_valid,
  output logic [DATA_W-1:0] rd_data,
  output logic              rd_hit,
  output logic              pm_valid,
  output logic              hk_valid,
  output logic              ek_valid
);
  localparam int unsigned S_PM = 0, S_HK = 1, S_EK = 2;

  logic [DATA_W-1:0] mem   [3];
  logic [2:0]        valid;
  logic              s1_valid, s1_hit;
  logic [1:0]        s1_slot;

  // slot chosen for a read
  logic [1:0] rd_slot;
  logic       rd_ok;
  always_comb begin
    rd_slot = 2'(S_PM);
    rd_ok   = 1'b0;
    if (rd_dst == OUT_HASH_KEY || rd_dst == OUT_HASH_IN) begin
      if (valid[S_HK]) begin rd_slot = 2'(S_HK); rd_ok = 1'b1; end
      else             begin rd_slot = 2'(S_PM); rd_ok = valid[S_PM]; end
    end else if (rd_dst == OUT_EN_KEY) begin
      rd_slot = 2'(S_EK);
      rd_ok   = valid[S_EK];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= '0;
      s1_valid <= 1'b0;
      s1_hit   <= 1'b0;
      s1_slot  <= '0;
      rd_valid <= 1'b0;
      rd_hit   <= 1'b0;
      rd_data  <= '0;
      for (int i = 0; i < 3; i++) mem[i] <= '0;
    end else begin
      // stage 1: select slot
      s1_valid <= rd_en;
      s1_hit   <= rd_en && rd_ok;
      s1_slot  <= rd_slot;
      // stage 2: read out, then erase everything but the pre-master key
      rd_valid <= s1_valid;
      rd_hit   <= s1_hit;
      rd_data  <= s1_hit ? mem[s1_slot] : '0;
      if (s1_hit && s1_slot != 2'(S_PM)) begin
        mem[s1_slot]   <= '0;
        valid[s1_slot] <= 1'b0;
      end
      // writes
      if (wr_en) begin
        if (wr_src == IN_RNG) begin
          mem[S_PM]   <= wr_data;
          valid[S_PM] <= 1'b1;
        end else if (wr_src == IN_HASH) begin
          mem[S_HK]   <= wr_data;
          mem[S_EK]   <= wr_data;
          valid[S_HK] <= 1'b1;
          valid[S_EK] <= 1'b1;
        end
      end
    end
  end

  assign pm_valid = valid[S_PM];
  assign hk_valid = valid[S_HK];
  assign ek_valid = valid[S_EK];
endmodule
