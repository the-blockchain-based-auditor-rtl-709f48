// bc_pkg: types and constants shared by the blockchain key auditor.
//
// The control word register (CWR) is 16 bits. Its layout is taken from the
// control-word figure and the instruction codes of the design: input (source)
// address in [15:12], output (destination) address in [11:8], "Buf cap" in [7]
// (capture a block header), "Bus sel" in [6] (enable the custom bus
// interconnect), and block enables RSA, RNG, HASH, ENC, MKM, Buff in [5:0].
// Address codes are those of the custom bus interconnect: sources RNG=0,
// Buff=1, Hash=2, PubEn=3; destinations Buff=0, Hash_key=1, En_key=2,
// Hash_in=3, Pub_en_in=4. The requestee IP numbering, the block header, the
// status word and the log record layout are choices of this implementation.
package bc_pkg;

  localparam int unsigned CWR_W  = 16;
  localparam int unsigned HASH_W = 512;   // SHA3-512 digest and pre-hash
  localparam int unsigned TS_W   = 32;    // timestamp
  localparam int unsigned STAT_W = 16;    // system status word in a block
  localparam int unsigned N_IN   = 4;     // CBI sources
  localparam int unsigned N_OUT  = 5;     // CBI destinations
  localparam int unsigned N_IP   = 4;     // IPs that own a key pair

  // CBI source addresses (CWR[15:12])
  localparam logic [3:0] IN_RNG   = 4'd0;
  localparam logic [3:0] IN_BUFF  = 4'd1;
  localparam logic [3:0] IN_HASH  = 4'd2;
  localparam logic [3:0] IN_PUBEN = 4'd3;

  // CBI destination addresses (CWR[11:8])
  localparam logic [3:0] OUT_BUFF      = 4'd0;
  localparam logic [3:0] OUT_HASH_KEY  = 4'd1;
  localparam logic [3:0] OUT_EN_KEY    = 4'd2;
  localparam logic [3:0] OUT_HASH_IN   = 4'd3;
  localparam logic [3:0] OUT_PUB_EN_IN = 4'd4;

  typedef struct packed {
    logic [3:0] in_addr;   // [15:12]
    logic [3:0] out_addr;  // [11:8]
    logic       buf_cap;   // [7]
    logic       bus_sel;   // [6]
    logic       en_rsa;    // [5]
    logic       en_rng;    // [4]
    logic       en_hash;   // [3]
    logic       en_enc;    // [2]
    logic       en_mkm;    // [1]
    logic       en_buff;   // [0]
  } cwr_t;

  // IPs that request MKM access and own an RSA key pair
  typedef enum logic [1:0] {
    IP_RNG  = 2'd0,
    IP_HASH = 2'd1,
    IP_AES  = 2'd2,
    IP_RSA  = 2'd3
  } ip_id_t;

  typedef enum logic {
    OP_READ  = 1'b0,
    OP_WRITE = 1'b1
  } blk_op_t;

  // System status captured into every block: enables and ready flags of the IPs
  typedef struct packed {
    logic       sc_busy;
    logic       sc_grant;
    logic       rsa_busy;
    logic       rsa_valid;
    logic       hash_busy;
    logic       hash_valid;
    logic       mkm_pm_valid;
    logic       mkm_hk_valid;
    logic       mkm_ek_valid;
    logic       rng_en;
    logic [5:0] cwr_en;
  } sys_status_t;

  // One audit record, emitted after every signature check. Keys never appear.
  typedef struct packed {
    logic [TS_W-1:0]   timestamp;
    blk_op_t           op;
    logic [3:0]        src;
    logic [3:0]        dst;
    ip_id_t            requestee;
    logic [STAT_W-1:0] status;
    logic              granted;
    logic [HASH_W-1:0] prehash;
    logic [HASH_W-1:0] digest;
  } bc_log_t;

  // Requestee of a transaction: the writer for a write, the reader for a read.
  // valid is low when the address names no key-owning IP.
  function automatic logic requestee_valid(blk_op_t op, logic [3:0] src, logic [3:0] dst);
    if (op == OP_WRITE)
      return (src == IN_RNG) || (src == IN_HASH) || (src == IN_PUBEN);
    else
      return (dst == OUT_HASH_KEY) || (dst == OUT_HASH_IN) ||
             (dst == OUT_EN_KEY) || (dst == OUT_PUB_EN_IN);
  endfunction

  function automatic ip_id_t requestee_id(blk_op_t op, logic [3:0] src, logic [3:0] dst);
    if (op == OP_WRITE) begin
      case (src)
        IN_RNG:   return IP_RNG;
        IN_HASH:  return IP_HASH;
        default:  return IP_RSA;
      endcase
    end else begin
      case (dst)
        OUT_EN_KEY:    return IP_AES;
        OUT_PUB_EN_IN: return IP_RSA;
        default:       return IP_HASH;
      endcase
    end
  endfunction

endpackage
