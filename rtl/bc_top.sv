// bc_top: blockchain-based auditor of the secret-key life cycle.
//
// Wires the crypto area and the confidential area of the security processor:
// the data path controller (AXI4-Lite slave of the PE, holding the control
// word), the custom bus interconnect, the SHA3 block, the RSA (PubEn) block,
// the buffer, the signature checker, the master key memory and the
// timestamp timer. Every movement of a key into or out of the master key
// memory goes through the buffer as one signed block; the signature checker
// verifies it with the requestee's public key and the buffer emits an audit
// record (log_*) for the PE to store in main memory.
// Parts outside this RTL come in as ports: the RNG (rng_*; rng_start pulses
// when an instruction with RNG and Bus sel set arrives, and the RNG answers
// with rng_done and its number), the PE's randoms for the SHA3 block
// (hash_rand*), the AES core (en_key/en_key_rdy), the PE's
// re-key path into the RSA block (rsa_rekey_*) and the IPs' public keys
// (pub_n/pub_e, generated offline). The interconnect carries DATA_W bits,
// which is also the RSA width.
// STATUS (AXI offset 0x4): [15:0] the system status word recorded in each
// block (bc_pkg::sys_status_t), [16] block open, [17] buffer data valid,
// [18] digest valid, [19] signature valid, [20] buffer busy verifying.
module bc_top
  import bc_pkg::*;
#(
  parameter int unsigned DATA_W = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite from the PE bus interconnect
  input  logic [3:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [3:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // RNG
  output logic              rng_en,
  output logic              rng_start,
  input  logic [DATA_W-1:0] rng_data,
  input  logic              rng_done,
  // AES
  output logic              enc_en,
  output logic [DATA_W-1:0] en_key,
  output logic              en_key_rdy,
  // PE loads client/server randoms into the SHA3 block
  input  logic              hash_rand_valid,
  input  logic [HASH_W-1:0] hash_rand,
  // PE re-key of the RSA block
  input  logic              rsa_rekey_valid,
  input  logic [DATA_W-1:0] rsa_rekey_n,
  input  logic [DATA_W-1:0] rsa_rekey_exp,
  // public keys of the IPs
  input  logic [DATA_W-1:0] pub_n [N_IP],
  input  logic [DATA_W-1:0] pub_e [N_IP],
  // audit log
  output logic              log_valid,
  output bc_log_t           log_rec,
  output logic [DATA_W-1:0] log_sig
);
  localparam int unsigned KEY_W = DATA_W;
  // interconnect destination indices (bc_pkg OUT_* codes)
  localparam int unsigned O_BUFF = 0, O_HASH_KEY = 1, O_EN_KEY = 2, O_HASH_IN = 3,
                          O_PUB_EN_IN = 4;

  cwr_t              cwr;
  logic              cwr_strobe;
  logic [31:0]       status_reg;
  sys_status_t       sys_status;
  logic [TS_W-1:0]   timestamp;

  // interconnect
  logic [DATA_W-1:0] cbi_in_data  [N_IN];
  logic              cbi_in_valid [N_IN];
  logic [DATA_W-1:0] cbi_out_data [N_OUT];
  logic              cbi_out_valid[N_OUT];

  // cores
  logic [DATA_W-1:0] hash_op, pub_op, buff_op;
  logic              hash_done, pub_op_rdy, buff_done;
  logic              hash_busy, hash_valid, rsa_busy, rsa_valid;

  // buffer <-> signature checker / MKM
  logic              sc_start, sc_done, sc_grant, sc_busy;
  logic [HASH_W-1:0] sc_data, sc_digest, prehash;
  logic [KEY_W-1:0]  sc_sig;
  blk_op_t           sc_op;
  logic [3:0]        sc_src, sc_dst;
  ip_id_t            sc_requestee;
  logic              mkm_wr_en, mkm_rd_en, mkm_rd_valid, mkm_rd_hit;
  logic [3:0]        mkm_wr_src, mkm_rd_dst;
  logic [DATA_W-1:0] mkm_wr_data, mkm_rd_data;
  logic              pm_valid, hk_valid, ek_valid;
  logic              blk_valid, data_valid, digest_valid, sig_valid, buf_busy;

  dpc u_dpc (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .cwr, .cwr_strobe, .status(status_reg)
  );

  timer #(.TS_W(TS_W)) u_timer (.clk, .rst_n, .en(1'b1), .timestamp);

  assign cbi_in_data[0]  = rng_data;  assign cbi_in_valid[0] = rng_done;
  assign cbi_in_data[1]  = buff_op;   assign cbi_in_valid[1] = buff_done;
  assign cbi_in_data[2]  = hash_op;   assign cbi_in_valid[2] = hash_done;
  assign cbi_in_data[3]  = pub_op;    assign cbi_in_valid[3] = pub_op_rdy;

  cbi #(.DATA_W(DATA_W), .N_IN(N_IN), .N_OUT(N_OUT)) u_cbi (
    .clk, .rst_n,
    .en       (cwr.bus_sel),
    .in_addr  (cwr.in_addr),
    .out_addr (cwr.out_addr),
    .in_data  (cbi_in_data),
    .in_valid (cbi_in_valid),
    .out_data (cbi_out_data),
    .out_valid(cbi_out_valid)
  );

  hash_core #(.DATA_W(DATA_W)) u_hash (
    .clk, .rst_n, .cwr_strobe,
    .en_hash      (cwr.en_hash),
    .hash_in      (cbi_out_data[O_HASH_IN]),
    .hash_in_rdy  (cbi_out_valid[O_HASH_IN]),
    .hash_key     (cbi_out_data[O_HASH_KEY]),
    .hash_key_rdy (cbi_out_valid[O_HASH_KEY]),
    .rand_valid   (hash_rand_valid),
    .rand_in      (hash_rand),
    .hash_op, .hash_done,
    .busy         (hash_busy),
    .valid        (hash_valid)
  );

  pub_en #(.KEY_W(KEY_W)) u_pub (
    .clk, .rst_n, .cwr_strobe,
    .en_rsa        (cwr.en_rsa),
    .rekey_valid   (rsa_rekey_valid),
    .rekey_n       (rsa_rekey_n),
    .rekey_exp     (rsa_rekey_exp),
    .pub_en_in     (cbi_out_data[O_PUB_EN_IN]),
    .pub_en_in_rdy (cbi_out_valid[O_PUB_EN_IN]),
    .pub_op, .pub_op_rdy,
    .busy          (rsa_busy),
    .valid         (rsa_valid)
  );

  buffer #(.DATA_W(DATA_W), .KEY_W(KEY_W)) u_buffer (
    .clk, .rst_n, .cwr, .cwr_strobe, .timestamp, .prehash,
    .status       (sys_status),
    .buff_in      (cbi_out_data[O_BUFF]),
    .buff_wr      (cbi_out_valid[O_BUFF]),
    .buff_op, .buff_done,
    .sc_start, .sc_data, .sc_sig, .sc_op, .sc_src, .sc_dst,
    .sc_done, .sc_grant, .sc_requestee, .sc_digest,
    .mkm_wr_en, .mkm_wr_src, .mkm_wr_data,
    .mkm_rd_en, .mkm_rd_dst, .mkm_rd_valid, .mkm_rd_data, .mkm_rd_hit,
    .log_valid, .log_rec, .log_sig,
    .blk_valid, .data_valid, .digest_valid, .sig_valid,
    .busy         (buf_busy)
  );

  sig_checker #(.KEY_W(KEY_W)) u_sc (
    .clk, .rst_n,
    .start     (sc_start),
    .data      (sc_data),
    .sig       (sc_sig),
    .op        (sc_op),
    .src       (sc_src),
    .dst       (sc_dst),
    .pub_n, .pub_e,
    .busy      (sc_busy),
    .done      (sc_done),
    .grant     (sc_grant),
    .requestee (sc_requestee),
    .digest    (sc_digest),
    .prehash   (prehash)
  );

  mkm #(.DATA_W(DATA_W)) u_mkm (
    .clk, .rst_n,
    .wr_en    (mkm_wr_en),
    .wr_src   (mkm_wr_src),
    .wr_data  (mkm_wr_data),
    .rd_en    (mkm_rd_en),
    .rd_dst   (mkm_rd_dst),
    .rd_valid (mkm_rd_valid),
    .rd_data  (mkm_rd_data),
    .rd_hit   (mkm_rd_hit),
    .pm_valid, .hk_valid, .ek_valid
  );

  always_comb begin
    sys_status.sc_busy      = sc_busy;
    sys_status.sc_grant     = sc_grant;
    sys_status.rsa_busy     = rsa_busy;
    sys_status.rsa_valid    = rsa_valid;
    sys_status.hash_busy    = hash_busy;
    sys_status.hash_valid   = hash_valid;
    sys_status.mkm_pm_valid = pm_valid;
    sys_status.mkm_hk_valid = hk_valid;
    sys_status.mkm_ek_valid = ek_valid;
    sys_status.rng_en       = cwr.en_rng;
    sys_status.cwr_en       = {cwr.en_rsa, cwr.en_rng, cwr.en_hash,
                               cwr.en_enc, cwr.en_mkm, cwr.en_buff};
    status_reg = {11'd0, buf_busy, sig_valid, digest_valid, data_valid, blk_valid,
                  sys_status};
  end

  assign rng_en     = cwr.en_rng;
  assign rng_start  = cwr_strobe && cwr.en_rng && cwr.bus_sel;
  assign enc_en     = cwr.en_enc;
  assign en_key     = cbi_out_data[O_EN_KEY];
  assign en_key_rdy = cbi_out_valid[O_EN_KEY];
endmodule
