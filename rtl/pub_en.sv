// pub_en: the crypto-area RSA block ("PubEn") as it meets the interconnect.
//
// The PE loads a modulus and exponent over its own bus (the paper's "Re-Key
// RSA" instruction). Data arriving on pub_en_in (signature step 3: the digest
// from the buffer) is raised to that exponent modulo the modulus by an
// rsa_modexp engine; the result leaves on pub_op with a one-clock pub_op_rdy
// pulse (step 4 writes it to the buffer as the signature). As in hash_core,
// the result is kept and pub_op_rdy is pulsed again when a new instruction
// with the RSA enable bit arrives while a result is held and the engine is
// idle. Arrivals while busy, and re-keying while busy, are ignored.
// The key that signs is not named by the paper; here the PE loads the
// requestee IP's private exponent before signing, so the signature checker
// can undo it with that IP's public key.
// Timing: pub_en_in_rdy at edge t starts the engine; pub_op_rdy is high
// 3*KEY_W+1 clocks after t.
module pub_en #(
  parameter int unsigned KEY_W = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cwr_strobe,
  input  logic             en_rsa,
  input  logic             rekey_valid,
  input  logic [KEY_W-1:0] rekey_n,
  input  logic [KEY_W-1:0] rekey_exp,
  input  logic [KEY_W-1:0] pub_en_in,
  input  logic             pub_en_in_rdy,
  output logic [KEY_W-1:0] pub_op,
  output logic             pub_op_rdy,
  output logic             busy,
  output logic             valid
);
  logic [KEY_W-1:0] key_n, key_e, r_result;
  logic             r_start, r_busy, r_done, started;

  assign r_start = !r_busy && pub_en_in_rdy;

  rsa_modexp #(.KEY_W(KEY_W)) u_rsa (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (r_start),
    .base    (pub_en_in),
    .exp     (key_e),
    .modulus (key_n),
    .busy    (r_busy),
    .done    (r_done),
    .result  (r_result)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_n      <= '0;
      key_e      <= '0;
      pub_op     <= '0;
      pub_op_rdy <= 1'b0;
      valid      <= 1'b0;
      started    <= 1'b0;
    end else begin
      pub_op_rdy <= 1'b0;
      if (rekey_valid && !r_busy) begin
        key_n <= rekey_n;
        key_e <= rekey_exp;
      end
      if (r_start) begin
        started <= 1'b1;
        valid   <= 1'b0;
      end
      if (r_done) begin
        pub_op     <= r_result;
        pub_op_rdy <= 1'b1;
        valid      <= 1'b1;
        started    <= 1'b0;
      end else if (cwr_strobe && en_rsa && valid && !started) begin
        pub_op_rdy <= 1'b1;
      end
    end
  end

  assign busy = started;
endmodule
