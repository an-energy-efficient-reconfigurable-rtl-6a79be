// dtls_pkg: types and constants shared by the DTLS engine blocks.
//
// Holds the SHA2-256 round constants and initial hash value (FIPS 180-4),
// the request/response bundle through which several masters (standalone
// hashing, HMAC, the session-hash unit) share the one SHA2-256 core, the ECC
// command encoding, and the word map of the 2 KB DTLS RAM. The split of the
// RAM into 0.45 KB config, 1.25 KB micro stack and 0.3 KB accelerator config
// follows the paper; the exact word boundaries and the command encodings are
// choices of this design.
package dtls_pkg;

  // ---------------------------------------------------------------- SHA2-256
  localparam logic [31:0] SHA256_K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };

  localparam logic [255:0] SHA256_IV =
    256'h6a09e667_bb67ae85_3c6ef372_a54ff53a_510e527f_9b05688c_1f83d9ab_5be0cd19;

  // Request from a master to the shared SHA2-256 core. At most one of
  // init/load/finish is pulsed per cycle; din is taken when din_valid and
  // the core's din_ready are both high.
  typedef struct packed {
    logic         init;      // start a new message: H <= IV, length <= 0
    logic         load;      // restore a saved state: H <= h_in, length <= len_in
    logic [255:0] h_in;
    logic [63:0]  len_in;    // bytes already digested (multiple of 64)
    logic         din_valid;
    logic [7:0]   din;
    logic         finish;    // pad the message and produce the digest
  } sha_req_t;

  typedef struct packed {
    logic         din_ready;
    logic         busy;
    logic         done;      // one-cycle pulse: digest (or block) complete
    logic [255:0] h_out;     // H0..H7, H0 in the top bits
    logic [63:0]  len_out;   // message bytes taken so far
  } sha_rsp_t;

  localparam sha_req_t SHA_REQ_IDLE = '0;

  // --------------------------------------------------------------------- ECC
  typedef enum logic [2:0] {
    ECC_PRECOMP = 3'd0,  // build the comb table of point (x,y) in a cache slot
    ECC_ECSM    = 3'd1,  // Q = k * P, P taken from a cache slot
    ECC_FMUL    = 3'd2,  // x * y mod p
    ECC_FADD    = 3'd3,  // x + y mod p
    ECC_FSUB    = 3'd4,  // x - y mod p
    ECC_FINV    = 3'd5   // x^-1 mod p
  } ecc_cmd_e;

  // Field micro-operations of the ECC datapath.
  typedef enum logic [2:0] {
    FOP_MUL = 3'd0,
    FOP_ADD = 3'd1,
    FOP_SUB = 3'd2,
    FOP_INV = 3'd3,
    FOP_MOV = 3'd4
  } fop_e;

  // ----------------------------------------------------------- DTLS RAM map
  // 512 words of 32 bits. Word addresses.
  localparam int RAM_WORDS    = 512;
  localparam int CFG_BASE     = 0;     // 115 words = 460 B  (paper: 0.45 KB)
  localparam int ACC_BASE     = 115;   // 77 words  = 308 B  (paper: 0.3 KB)
  localparam int STACK_BASE   = 192;   // 320 words = 1280 B (paper: 1.25 KB)

  // Engine commands written to the command register.
  typedef enum logic [3:0] {
    CMD_NOP       = 4'd0,
    CMD_SHA       = 4'd1,
    CMD_GCM       = 4'd2,
    CMD_ECC       = 4'd3,
    CMD_DRBG_INST = 4'd4,
    CMD_DRBG_GEN  = 4'd5,
    CMD_TSNAP     = 4'd6,  // write the transcript hash so far to the accel area
    CMD_TPUSH     = 4'd7,  // move the IN FIFO bytes into the transcript
    CMD_TCLEAR    = 4'd8,  // start a new transcript
    CMD_HKDF_EXT  = 4'd9,  // HKDF-Extract
    CMD_HKDF_EXP  = 4'd10  // HKDF-Expand, one block
  } de_cmd_e;

endpackage
