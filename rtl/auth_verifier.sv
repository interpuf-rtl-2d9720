// auth_verifier: the interposer side of chiplet authentication. It evaluates,
// in the clear, the fixed function f_i of the paper's protocol:
//
//   b_i  = (G'_i == G_i) and puf_ok          (plus the gating below)
//   T'_i = SHA256(G'_i || s || Nonce)         (576 bits, two blocks, 192 cycles)
//
// G_i is the one-time commitment written at enrollment (g_we; a second write
// to the same chiplet is refused and reported on g_refused). A request
// (req, while idle) carries the chiplet index, its hashed signature G'_i, the
// session salt s, the nonce, puf_ok and (for the audit log) ch and Epoch.
// Gating, from the paper's denial-of-service and replay sections:
//  * a chiplet that failed MAX_ATTEMPTS times in a row is locked for COOLDOWN
//    cycles and its requests are answered RES_LOCKED at once, with no hashing;
//  * a nonce equal to the last one accepted for the chiplet is a replay.
// Otherwise the token is always computed (constant latency) and revealed only
// on acceptance. done pulses with res, b and token 196 cycles after req
// (two 96-cycle compressions plus 4 control cycles; 1 to 3 when locked). Every acceptance sets the
// chiplet's bit in accepted and writes an audit entry (auth_log);
// quorum_ok = at least QUORUM chiplets of subset_mask accepted in this epoch;
// new_epoch clears accepted. The garbled-circuit / oblivious-transfer
// wrapping that hides G_i and ID/SIG during this evaluation is not built: this
// block computes the same outputs directly. Attempt limits, cooldown length,
// quorum and log depth are this design's numbers.
//
// Lint notes: the hash core's busy flag and 16-bit digest stream are not used
// here (the verifier waits for done and reads the whole digest) and are
// reported unused. rst_n is reported as used both synchronously and
// asynchronously only because of the assertion's disable condition.
module auth_verifier
  import interpuf_pkg::*;
#(
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned MAX_ATTEMPTS = 3,
  parameter int unsigned COOLDOWN     = 1024,
  parameter int unsigned QUORUM       = NUM_CHIPLETS,
  parameter int unsigned LOG_DEPTH    = 8,
  localparam int unsigned CW  = (NUM_CHIPLETS > 1) ? $clog2(NUM_CHIPLETS) : 1,
  localparam int unsigned LAW = (LOG_DEPTH > 1) ? $clog2(LOG_DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // enrollment
  input  logic          g_we,
  input  logic [CW-1:0] g_idx,
  input  digest_t       g_data,
  output logic          g_refused,
  // authentication request
  input  logic          req,
  input  logic [CW-1:0] req_idx,
  input  digest_t       req_gsig,
  input  digest_t       req_salt,
  input  nonce_t        req_nonce,
  input  logic          req_puf_ok,
  input  chal_t         req_ch,
  input  epoch_t        req_epoch,
  output logic          busy,
  output logic          done,
  output logic [CW-1:0] res_idx,
  output auth_res_e     res,
  output logic          b,
  output digest_t       token,
  // policy
  input  logic          new_epoch,
  input  logic [NUM_CHIPLETS-1:0] subset_mask,
  output logic [NUM_CHIPLETS-1:0] accepted,
  output logic [NUM_CHIPLETS-1:0] enrolled,
  output logic          quorum_ok,
  output logic [NUM_CHIPLETS-1:0] locked,
  // audit log read port
  input  logic [LAW-1:0] log_rd_idx,
  output logic [CW-1:0]  log_chip,
  output chal_t          log_ch,
  output epoch_t         log_epoch,
  output nonce_t         log_nonce,
  output digest_t        log_token,
  output logic [LAW:0]   log_count
);
  localparam int unsigned AW = $clog2(MAX_ATTEMPTS + 1);
  localparam int unsigned TW = $clog2(COOLDOWN + 1);

  typedef enum logic [2:0] {S_IDLE, S_H0, S_W0, S_H1, S_W1, S_DONE} state_e;
  state_e state;

  digest_t        gstore [NUM_CHIPLETS];
  nonce_t         last_nonce [NUM_CHIPLETS];
  logic [NUM_CHIPLETS-1:0] nonce_used;
  logic [AW-1:0]  fails [NUM_CHIPLETS];
  logic [TW-1:0]  cool  [NUM_CHIPLETS];

  logic [CW-1:0]  idx_q;
  digest_t        gsig_q, salt_q;
  nonce_t         nonce_q;
  logic           puf_ok_q;
  chal_t          ch_q;
  epoch_t         epoch_q;

  // ------------------------------------------------ token hash (2 blocks)
  logic sha_start, sha_busy, sha_done, dist_valid;
  logic [15:0] dist_data;
  block_t  sha_blk;
  logic [255:0] sha_hin, sha_out, h_mid;
  assign sha_start = (state == S_H0) || (state == S_H1);
  assign sha_blk   = (state == S_H0) ? t_block0(gsig_q, salt_q) : t_block1(nonce_q);
  assign sha_hin   = (state == S_H0) ? SHA256_IV : h_mid;

  sha256_core u_sha (.clk, .rst_n, .start(sha_start), .block(sha_blk), .h_in(sha_hin),
                     .busy(sha_busy), .done(sha_done), .h_out(sha_out), .dist_valid, .dist_data);

  // ------------------------------------------------ decision
  auth_res_e verdict;
  always_comb begin
    if (!enrolled[idx_q])                                     verdict = RES_NOT_ENROLLED;
    else if (gsig_q != gstore[idx_q])                         verdict = RES_BAD_COMMIT;
    else if (!puf_ok_q)                                       verdict = RES_PUF_FAIL;
    else if (nonce_used[idx_q] && last_nonce[idx_q] == nonce_q) verdict = RES_REPLAY;
    else                                                      verdict = RES_ACCEPT;
  end

  for (genvar i = 0; i < NUM_CHIPLETS; i++) begin : g_lock
    assign locked[i] = (cool[i] != '0);
  end

  assign busy = (state != S_IDLE);
  assign quorum_ok = ($countones(accepted & subset_mask) >= QUORUM);

  logic log_wr;
  assign log_wr = (state == S_W1) && sha_done && (verdict == RES_ACCEPT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; res <= RES_ACCEPT; b <= 1'b0; token <= '0;
      res_idx <= '0; g_refused <= 1'b0; accepted <= '0; enrolled <= '0; nonce_used <= '0;
      idx_q <= '0; gsig_q <= '0; salt_q <= '0; nonce_q <= '0; puf_ok_q <= 1'b0;
      ch_q <= '0; epoch_q <= '0; h_mid <= '0;
      for (int i = 0; i < NUM_CHIPLETS; i++) begin
        gstore[i] <= '0; last_nonce[i] <= '0; fails[i] <= '0; cool[i] <= '0;
      end
    end else begin
      done      <= 1'b0;
      g_refused <= 1'b0;
      for (int i = 0; i < NUM_CHIPLETS; i++) if (cool[i] != '0) cool[i] <= cool[i] - TW'(1);
      if (new_epoch) accepted <= '0;
      if (g_we) begin
        if (enrolled[g_idx]) g_refused <= 1'b1;
        else begin gstore[g_idx] <= g_data; enrolled[g_idx] <= 1'b1; end
      end
      unique case (state)
        S_IDLE: if (req) begin
          idx_q <= req_idx; gsig_q <= req_gsig; salt_q <= req_salt; nonce_q <= req_nonce;
          puf_ok_q <= req_puf_ok; ch_q <= req_ch; epoch_q <= req_epoch;
          if (cool[req_idx] != '0) begin
            res <= RES_LOCKED; b <= 1'b0; token <= '0; res_idx <= req_idx;
            state <= S_DONE;
          end else state <= S_H0;
        end
        S_H0: state <= S_W0;
        S_W0: if (sha_done) begin h_mid <= sha_out; state <= S_H1; end
        S_H1: state <= S_W1;
        S_W1: if (sha_done) begin
          res     <= verdict;
          res_idx <= idx_q;
          b       <= (verdict == RES_ACCEPT);
          token   <= (verdict == RES_ACCEPT) ? sha_out : '0;
          if (verdict == RES_ACCEPT) begin
            fails[idx_q]      <= '0;
            accepted[idx_q]   <= 1'b1;
            last_nonce[idx_q] <= nonce_q;
            nonce_used[idx_q] <= 1'b1;
          end else if (fails[idx_q] == AW'(MAX_ATTEMPTS - 1)) begin
            fails[idx_q] <= '0;
            cool[idx_q]  <= TW'(COOLDOWN);
          end else fails[idx_q] <= fails[idx_q] + AW'(1);
          state <= S_DONE;
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  auth_log #(.DEPTH(LOG_DEPTH), .CHIP_W(CW)) u_log (
    .clk, .rst_n, .wr(log_wr), .wr_chip(idx_q), .wr_ch(ch_q), .wr_epoch(epoch_q),
    .wr_nonce(nonce_q), .wr_token(sha_out), .rd_idx(log_rd_idx), .rd_chip(log_chip),
    .rd_ch(log_ch), .rd_epoch(log_epoch), .rd_nonce(log_nonce), .rd_token(log_token),
    .count(log_count));

  // a request is only taken while idle; results come one at a time
  assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy);

endmodule
