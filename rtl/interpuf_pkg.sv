// interpuf_pkg: constants, types and helper functions shared by the interposer
// authentication fabric.
//
// Holds the SHA-256 round constants and initial hash value, the field widths of
// the enrollment commitment and the session token, the mesh port encoding, and
// single-block SHA-256 padding helpers. Field widths (identifier, signature,
// epoch, nonce, challenge) are this design's own choices; the digest length of
// 256 bits and the use of SHA-256 follow the paper.
//
// Lint note: a module that imports this package but uses only part of it
// (for example only the SHA-256 constants) makes the linter report the other
// constants as unused parameters; every constant is used by some module.
package interpuf_pkg;

  // ---------------------------------------------------------------- SHA-256
  localparam int unsigned DIGEST_W = 256;
  typedef logic [DIGEST_W-1:0] digest_t;
  typedef logic [511:0]        block_t;

  localparam logic [255:0] SHA256_IV = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  localparam logic [31:0] SHA256_K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};

  // Phase lengths of one compression, as printed in the timing diagram.
  localparam int unsigned SHA_SCHED_CYC = 16;
  localparam int unsigned SHA_COMP_CYC  = 64;
  localparam int unsigned SHA_DIST_CYC  = 16;
  localparam int unsigned SHA_CYCLES    = SHA_SCHED_CYC + SHA_COMP_CYC + SHA_DIST_CYC; // 96

  // ------------------------------------------------------- protocol fields
  localparam int unsigned ID_W    = 32;   // chiplet identifier ID_i
  localparam int unsigned SIG_W   = 64;   // vendor signature / silicon secret SIG_i
  localparam int unsigned TAG_W   = 32;   // EnrollTag
  localparam int unsigned CH_W    = 32;   // routing challenge ch
  localparam int unsigned EPOCH_W = 32;   // session identifier Epoch
  localparam int unsigned NONCE_W = 64;   // per-session nonce

  typedef logic [ID_W-1:0]    id_t;
  typedef logic [SIG_W-1:0]   sig_t;
  typedef logic [TAG_W-1:0]   tag_t;
  typedef logic [CH_W-1:0]    chal_t;
  typedef logic [EPOCH_W-1:0] epoch_t;
  typedef logic [NONCE_W-1:0] nonce_t;

  // Message lengths in bits.
  localparam int unsigned G_MSG_W = ID_W + SIG_W + DIGEST_W + TAG_W;      // 384
  localparam int unsigned S_MSG_W = DIGEST_W + CH_W + EPOCH_W;            // 320
  localparam int unsigned T_MSG_W = DIGEST_W + DIGEST_W + NONCE_W;        // 576

  // Pad a message of LEN <= 447 bits (left-aligned in msg) into one block.
  function automatic block_t sha_pad1(input logic [447:0] msg, input int unsigned len);
    block_t b;
    b = '0;
    b[511 -: 448] = msg;
    b[511 - len]  = 1'b1;
    b[63:0]       = 64'(len);
    return b;
  endfunction

  // SHA-256 message-block helpers for the fixed-length messages used here.
  function automatic block_t g_block(input id_t id, input sig_t sig,
                                     input digest_t rstar, input tag_t tag);
    return sha_pad1({id, sig, rstar, tag, 64'd0}, G_MSG_W);
  endfunction

  function automatic block_t s_block(input digest_t rstar, input chal_t ch,
                                     input epoch_t epoch);
    return sha_pad1({rstar, ch, epoch, 128'd0}, S_MSG_W);
  endfunction

  function automatic block_t r_block(input digest_t bits);
    return sha_pad1({bits, 192'd0}, DIGEST_W);
  endfunction

  // Token message G'||s||Nonce is 576 bits: two blocks.
  function automatic block_t t_block0(input digest_t g, input digest_t s);
    return {g, s};
  endfunction

  function automatic block_t t_block1(input nonce_t nonce);
    block_t b;
    b = '0;
    b[511 -: NONCE_W] = nonce;
    b[511 - NONCE_W]  = 1'b1;
    b[63:0]           = 64'(T_MSG_W);
    return b;
  endfunction

  // ------------------------------------------------------------ mesh ports
  typedef enum logic [2:0] {
    DIR_NORTH = 3'd0, DIR_EAST = 3'd1, DIR_SOUTH = 3'd2, DIR_WEST = 3'd3,
    DIR_LOCAL = 3'd4, DIR_OFF  = 3'd7
  } dir_e;

  // ------------------------------------------------------ controller modes
  typedef enum logic [1:0] {
    CMD_ENROLL = 2'd0,   // build the golden route digest R* and helper mask
    CMD_VERIFY = 2'd1,   // regenerate the digest from the helper mask, set puf_ok
    CMD_ZCHECK = 2'd2    // golden-free Z* self-check of the path pairs
  } ctrl_cmd_e;

  // ------------------------------------------------------------ PUF sizes
  localparam int unsigned N_STAGES  = 32;  // crossbar stages per route (one challenge bit each)
  localparam int unsigned NUM_PAIRS = 80;  // source-sink path pairs
  localparam int unsigned NUM_PERMS = 8;   // path permutations per pair
  localparam int unsigned NUM_CAND  = NUM_PAIRS * NUM_PERMS;   // 640 candidate bits
  localparam int unsigned DLY_W     = 16;  // width of a modelled route delay
  typedef logic [N_STAGES-1:0] stage_cfg_t;  // 1 = crossed stage, 0 = straight

  // Obfuscator key: {mixing taps, polarity mask, 27'b0, rotation}
  typedef struct packed {
    logic [CH_W-1:0] taps;
    logic [CH_W-1:0] polarity;
    logic [CH_W-1:0] rot;     // only the low $clog2(CH_W) bits are used
  } obf_key_t;

  // PUF evaluation timing: 1 scheduling cycle + 5 evaluation cycles.
  localparam int unsigned PUF_EVAL_CYC = 6;

  // ------------------------------------------------------ verifier result
  typedef enum logic [2:0] {
    RES_ACCEPT       = 3'd0,
    RES_BAD_COMMIT   = 3'd1,   // G'_i differs from the stored commitment
    RES_PUF_FAIL     = 3'd2,   // interposer route digest not regenerated
    RES_LOCKED       = 3'd3,   // too many failures: cooling down
    RES_REPLAY       = 3'd4,   // nonce already used by an accepted session
    RES_NOT_ENROLLED = 3'd5    // no commitment stored for this chiplet
  } auth_res_e;

endpackage
