// buffer: the gateway between the crypto area and the master key memory.
//
// The buffer holds one block of the key-audit chain: data (the key being
// moved), a header (timestamp, pre-hash from the signature checker, read or
// write, source and destination address, system status), the SHA3 digest of
// the data and the signature of that digest. The PE drives it through the
// CWR; the buffer acts on cwr_strobe when the Buff enable bit is set:
//  * Buf cap set: block generation. The header is captured; op is read when
//    the source address is Buff, else write. Digest and signature are
//    cleared, and for a read the data too.
//  * Bus sel set, source Buff, Buf cap clear: read-out to the interconnect.
//    Pub_en_in receives the digest; every other destination the data. Data
//    sent to Hash_in starts a signature (the next hash result is taken as the
//    digest); data sent to Hash_key or En_key leaves the buffer and is erased.
//  * MKM enable set, Buf cap clear: verify. The signature checker is started;
//    when it grants, a write stores the data in the MKM and erases it here,
//    and a read loads the key from the MKM into the data field. When it
//    refuses, the block is discarded. Either way one audit record is emitted
//    and the block is closed.
// Data arriving from the interconnect (buff_wr) is stored whatever the
// enables: from PubEn into the signature, from Hash into the digest while a
// signature is pending and into the data otherwise, from the RNG into the
// data.
// The fields and the roles of the instructions are the paper's. Telling the
// two "Hash to Buff" instructions apart by the pending-signature flag, the
// field chosen per destination and erasing keys once delivered are this
// design's.
// Timing: a read-out strobe at edge t gives an internal read at edge t+1 and
// buff_op/buff_done during the clock after t+1. Verify: sc_start is high the
// clock after the strobe; log_valid pulses the clock after sc_done; a read
// fills the data two clocks after the MKM request.
module buffer
  import bc_pkg::*;
#(
  parameter int unsigned DATA_W = 1024,
  parameter int unsigned KEY_W  = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cwr_t              cwr,
  input  logic              cwr_strobe,
  input  logic [TS_W-1:0]   timestamp,
  input  logic [HASH_W-1:0] prehash,
  input  logic [STAT_W-1:0] status,
  // interconnect
  input  logic [DATA_W-1:0] buff_in,
  input  logic              buff_wr,
  output logic [DATA_W-1:0] buff_op,
  output logic              buff_done,
  // signature checker
  output logic              sc_start,
  output logic [HASH_W-1:0] sc_data,
  output logic [KEY_W-1:0]  sc_sig,
  output blk_op_t           sc_op,
  output logic [3:0]        sc_src,
  output logic [3:0]        sc_dst,
  input  logic              sc_done,
  input  logic              sc_grant,
  input  ip_id_t            sc_requestee,
  input  logic [HASH_W-1:0] sc_digest,
  // master key memory
  output logic              mkm_wr_en,
  output logic [3:0]        mkm_wr_src,
  output logic [DATA_W-1:0] mkm_wr_data,
  output logic              mkm_rd_en,
  output logic [3:0]        mkm_rd_dst,
  input  logic              mkm_rd_valid,
  input  logic [DATA_W-1:0] mkm_rd_data,
  input  logic              mkm_rd_hit,
  // audit log
  output logic              log_valid,
  output bc_log_t           log_rec,
  output logic [KEY_W-1:0]  log_sig,
  // flags for the status word
  output logic              blk_valid,
  output logic              data_valid,
  output logic              digest_valid,
  output logic              sig_valid,
  output logic              busy
);
  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_MKM_RD} state_t;
  state_t state;

  logic [DATA_W-1:0] data_q;
  logic [HASH_W-1:0] digest_q;
  logic [KEY_W-1:0]  sig_q;
  logic [TS_W-1:0]   h_ts;
  logic [HASH_W-1:0] h_prehash;
  blk_op_t           h_op;
  logic [3:0]        h_src, h_dst;
  logic [STAT_W-1:0] h_status;
  logic              sig_phase;
  logic              rd_pend;
  logic [3:0]        rd_dst_q;

  logic act_cap, act_read, act_verify;
  assign act_cap    = cwr_strobe && cwr.en_buff && cwr.buf_cap;
  assign act_read   = cwr_strobe && cwr.en_buff && !cwr.buf_cap && cwr.bus_sel &&
                      (cwr.in_addr == IN_BUFF) && !cwr.en_mkm;
  assign act_verify = cwr_strobe && cwr.en_buff && !cwr.buf_cap && cwr.en_mkm &&
                      (state == S_IDLE);

  assign sc_data = data_q[HASH_W-1:0];
  assign sc_sig  = sig_q;
  assign sc_op   = h_op;
  assign sc_src  = h_src;
  assign sc_dst  = h_dst;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      data_q       <= '0;
      digest_q     <= '0;
      sig_q        <= '0;
      h_ts         <= '0;
      h_prehash    <= '0;
      h_op         <= OP_READ;
      h_src        <= '0;
      h_dst        <= '0;
      h_status     <= '0;
      sig_phase    <= 1'b0;
      rd_pend      <= 1'b0;
      rd_dst_q     <= '0;
      buff_op      <= '0;
      buff_done    <= 1'b0;
      sc_start     <= 1'b0;
      mkm_wr_en    <= 1'b0;
      mkm_wr_src   <= '0;
      mkm_wr_data  <= '0;
      mkm_rd_en    <= 1'b0;
      mkm_rd_dst   <= '0;
      log_valid    <= 1'b0;
      log_rec      <= '0;
      log_sig      <= '0;
      blk_valid    <= 1'b0;
      data_valid   <= 1'b0;
      digest_valid <= 1'b0;
      sig_valid    <= 1'b0;
    end else begin
      buff_done <= 1'b0;
      sc_start  <= 1'b0;
      mkm_wr_en <= 1'b0;
      mkm_rd_en <= 1'b0;
      log_valid <= 1'b0;

      // ---- data from the interconnect
      if (buff_wr) begin
        if (cwr.in_addr == IN_PUBEN) begin
          sig_q     <= KEY_W'(buff_in);
          sig_valid <= 1'b1;
        end else if (cwr.in_addr == IN_HASH && sig_phase) begin
          digest_q     <= buff_in[HASH_W-1:0];
          digest_valid <= 1'b1;
          sig_phase    <= 1'b0;
        end else begin
          data_q     <= buff_in;
          data_valid <= 1'b1;
        end
      end

      // ---- block generation
      if (act_cap) begin
        h_ts         <= timestamp;
        h_prehash    <= prehash;
        h_op         <= (cwr.in_addr == IN_BUFF) ? OP_READ : OP_WRITE;
        h_src        <= cwr.in_addr;
        h_dst        <= cwr.out_addr;
        h_status     <= status;
        blk_valid    <= 1'b1;
        digest_q     <= '0;
        digest_valid <= 1'b0;
        sig_q        <= '0;
        sig_valid    <= 1'b0;
        sig_phase    <= 1'b0;
        if (cwr.in_addr == IN_BUFF) begin
          data_q     <= '0;
          data_valid <= 1'b0;
        end
      end

      // ---- read-out to the interconnect
      rd_pend <= act_read;
      if (act_read) rd_dst_q <= cwr.out_addr;
      if (rd_pend) begin
        buff_done <= 1'b1;
        if (rd_dst_q == OUT_PUB_EN_IN) begin
          buff_op <= DATA_W'(digest_q);
        end else begin
          buff_op <= data_q;
          if (rd_dst_q == OUT_HASH_IN) sig_phase <= 1'b1;
          if (rd_dst_q == OUT_HASH_KEY || rd_dst_q == OUT_EN_KEY) begin
            data_q     <= '0;
            data_valid <= 1'b0;
          end
        end
      end

      // ---- verify and MKM transfer
      case (state)
        S_IDLE: begin
          if (act_verify) begin
            sc_start <= 1'b1;
            state    <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (sc_done) begin
            log_valid         <= 1'b1;
            log_rec.timestamp <= h_ts;
            log_rec.op        <= h_op;
            log_rec.src       <= h_src;
            log_rec.dst       <= h_dst;
            log_rec.requestee <= sc_requestee;
            log_rec.status    <= h_status;
            log_rec.granted   <= sc_grant;
            log_rec.prehash   <= h_prehash;
            log_rec.digest    <= sc_digest;
            log_sig           <= sig_q;
            blk_valid         <= 1'b0;
            digest_q          <= '0;
            digest_valid      <= 1'b0;
            sig_q             <= '0;
            sig_valid         <= 1'b0;
            state             <= S_IDLE;
            if (sc_grant && h_op == OP_WRITE) begin
              mkm_wr_en   <= 1'b1;
              mkm_wr_src  <= h_src;
              mkm_wr_data <= data_q;
              data_q      <= '0;
              data_valid  <= 1'b0;
            end else if (sc_grant) begin
              mkm_rd_en  <= 1'b1;
              mkm_rd_dst <= h_dst;
              state      <= S_MKM_RD;
            end else begin
              data_q     <= '0;
              data_valid <= 1'b0;
            end
          end
        end
        default: begin  // S_MKM_RD
          if (mkm_rd_valid) begin
            data_q     <= mkm_rd_data;
            data_valid <= mkm_rd_hit;
            state      <= S_IDLE;
          end
        end
      endcase
    end
  end

  // the buffer never writes and reads the MKM in the same clock
  a_mkm_excl: assert property (@(posedge clk) disable iff (!rst_n) !(mkm_wr_en && mkm_rd_en));
endmodule
