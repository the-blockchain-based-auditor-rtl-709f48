// hash_core: the crypto-area SHA3 block as it meets the custom bus interconnect.
//
// Data arriving on Hash_in (message, signature step 1) starts a SHA3-512 of
// its low 512 bits in a keccak512 engine. Data arriving on Hash_key (the
// pre-master key) starts a SHA3-512 of its low 512 bits XOR the 512-bit
// randoms register, which the PE loads with the client and server randoms
// (rand_valid/rand_in); the result is the master key material. Mixing in
// the randoms also keeps the master key apart from the digest of the
// pre-master key that the audit log records. The digest, zero-extended to DATA_W, is put on
// hash_op with a one-clock hash_done pulse when the engine finishes. The core
// keeps the digest; if a new instruction with the HASH enable bit arrives
// while a digest is held and the engine is idle, hash_done is pulsed again,
// so "Hash to Buff" works whether the PE writes it before or after the hash
// finishes. Arrivals while busy are dropped.
// Starting on the data strobe follows the paper's timing figure and the
// instruction codes (step 1 of the signature does not set the HASH bit); the
// replay pulse and the XOR of key and randoms are this design's choices: the paper does not describe this base-design core.
// Timing: hash_in_rdy at edge t starts the engine; hash_done is high during
// the 25th clock after t (keccak512's 24 clocks plus one output register).
module hash_core
  import bc_pkg::*;
#(
  parameter int unsigned DATA_W = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cwr_strobe,
  input  logic              en_hash,
  input  logic [DATA_W-1:0] hash_in,
  input  logic              hash_in_rdy,
  input  logic [DATA_W-1:0] hash_key,
  input  logic              hash_key_rdy,
  input  logic              rand_valid,
  input  logic [HASH_W-1:0] rand_in,
  output logic [DATA_W-1:0] hash_op,
  output logic              hash_done,
  output logic              busy,
  output logic              valid
);
  logic         k_start, k_busy, k_done;
  logic [511:0] k_msg, k_digest;

  assign k_start = !k_busy && (hash_in_rdy || hash_key_rdy);
  logic [HASH_W-1:0] rand_q;
  assign k_msg   = hash_in_rdy ? hash_in[HASH_W-1:0] : (hash_key[HASH_W-1:0] ^ rand_q);

  keccak512 u_keccak (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (k_start),
    .msg    (k_msg),
    .busy   (k_busy),
    .done   (k_done),
    .digest (k_digest)
  );

  logic started;  // engine was started but has not reported yet
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hash_op   <= '0;
      rand_q    <= '0;
      hash_done <= 1'b0;
      valid     <= 1'b0;
      started   <= 1'b0;
    end else begin
      hash_done <= 1'b0;
      if (rand_valid) rand_q <= rand_in;
      if (k_start) begin
        started <= 1'b1;
        valid   <= 1'b0;
      end
      if (k_done) begin
        hash_op   <= DATA_W'(k_digest);
        hash_done <= 1'b1;
        valid     <= 1'b1;
        started   <= 1'b0;
      end else if (cwr_strobe && en_hash && valid && !started) begin
        hash_done <= 1'b1;
      end
    end
  end

  assign busy = started;
endmodule
