// sig_checker: signature checker of the confidential area.
//
// Decides whether a requested MKM transaction is authentic. The signature in
// the buffer is the requestee IP's RSA private-key encryption of the
// SHA3-512 digest of the block's data. On start the checker runs, in
// parallel, its own keccak512 over the data and its own rsa_modexp that
// raises the signature to the requestee's public exponent modulo its public
// modulus. The requestee is the writer (source) for a write and the reader
// (destination) for a read. The transaction is granted when the RSA result
// equals the digest zero-extended to KEY_W and the requestee is a key-owning
// IP. After each check the digest becomes the pre-hash that the next block
// header records, which chains the audit log.
// Only the data is hashed: the header (timestamp, status, pre-hash) is
// logged but not covered by the signature, since header and data together
// would need a multi-block SHA3. The paper checks them together.
// The two engines and the comparison are the paper's; choosing the
// destination for reads, the chaining rule (every checked block, granted or
// not) and key ports instead of an internal key table are this design's.
// Timing: start sampled while idle at edge t; done is high for one clock at
// t + 3*KEY_W + 1, with grant and digest valid then and held until the next
// start. prehash changes on the same edge as done rises.
module sig_checker
  import bc_pkg::*;
#(
  parameter int unsigned KEY_W = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [HASH_W-1:0] data,
  input  logic [KEY_W-1:0]  sig,
  input  blk_op_t           op,
  input  logic [3:0]        src,
  input  logic [3:0]        dst,
  input  logic [KEY_W-1:0]  pub_n [N_IP],
  input  logic [KEY_W-1:0]  pub_e [N_IP],
  output logic              busy,
  output logic              done,
  output logic              grant,
  output ip_id_t            requestee,
  output logic [HASH_W-1:0] digest,
  output logic [HASH_W-1:0] prehash
);
  initial assert (KEY_W > HASH_W) else $error("KEY_W must exceed the digest width");

  logic              go;
  logic              k_busy, k_done, r_busy, r_done;
  logic [HASH_W-1:0] k_digest;
  logic [KEY_W-1:0]  r_result;
  logic              k_seen, r_seen, req_ok;
  ip_id_t            id_now;

  assign id_now = requestee_id(op, src, dst);
  assign go     = start && !busy;

  keccak512 u_keccak (
    .clk(clk), .rst_n(rst_n), .start(go), .msg(data),
    .busy(k_busy), .done(k_done), .digest(k_digest)
  );

  rsa_modexp #(.KEY_W(KEY_W)) u_rsa (
    .clk(clk), .rst_n(rst_n), .start(go), .base(sig),
    .exp(pub_e[id_now]), .modulus(pub_n[id_now]),
    .busy(r_busy), .done(r_done), .result(r_result)
  );

  logic k_fin, r_fin;
  assign k_fin = k_seen || k_done;
  assign r_fin = r_seen || r_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      grant     <= 1'b0;
      requestee <= IP_RNG;
      digest    <= '0;
      prehash   <= '0;
      k_seen    <= 1'b0;
      r_seen    <= 1'b0;
      req_ok    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (go) begin
        busy      <= 1'b1;
        grant     <= 1'b0;
        requestee <= id_now;
        req_ok    <= requestee_valid(op, src, dst);
        k_seen    <= 1'b0;
        r_seen    <= 1'b0;
      end else if (busy) begin
        if (k_done) k_seen <= 1'b1;
        if (r_done) r_seen <= 1'b1;
        if (k_fin && r_fin) begin
          busy    <= 1'b0;
          done    <= 1'b1;
          digest  <= k_digest;
          prehash <= k_digest;
          grant   <= req_ok && (r_result == KEY_W'(k_digest));
        end
      end
    end
  end

  // the engines never run unless a check is in progress
  a_engines_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                   !busy |-> !(k_busy || r_busy) || go);
endmodule
