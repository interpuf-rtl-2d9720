// interpuf_top: the interposer-resident authentication fabric of a
// system-in-package, with the per-chiplet hashing engines of NUM_CHIPLETS
// chiplets.
//
// Layers, as in the paper's architecture:
//  * interposer_mesh: MESH x MESH reconfigurable routing mesh that carries
//    chiplet traffic (local ports, switchbox configuration port);
//  * route PUF: two delay_chain_model instances (routes A and B of the path
//    pair selected by the controller) and a diff_arbiter_model at the sink;
//    these are behavioural stand-ins for the physical delay stages;
//  * auth_controller: challenge scheduling and obfuscation, K-fold majority
//    voting and stability filtering, response hashing to R*, Z* self-check;
//  * session_binder: s = SHA256(R* || ch || Epoch), gated by puf_ok;
//  * chiplet_enc x NUM_CHIPLETS: G'_i = SHA256(ID_i || SIG_i || R* || Tag);
//  * auth_verifier: commitment check, token T'_i, attempt gating, replay
//    check, quorum and audit log.
// Operation (driven through the ports, see the end-to-end testbench):
// enroll the route digest (ctrl_cmd = ENROLL) and the Z* vector (ZCHECK with
// zenroll), store R*, the helper mask and each chiplet's commitment
// (commit_we) in non-volatile storage outside this module; in the field run
// VERIFY (puf_ok), bind the session, let each chiplet hash its signature and
// submit it (auth_req). The PUF evaluation and the chiplet hashing run
// concurrently. Non-volatile storage and the nonce source are outside this
// module and enter as ports. trojan_pair/trojan_dly model a hidden delay on
// route B of one pair, for self-check tests only.
//
// Lint notes: the session hasher's busy flag, the verifier's enrolled mask and
// the audit log's chiplet/ch/Epoch/Nonce read fields are internal and left
// unconnected at this level (only the logged token and count are ports), so
// they are reported unused. rst_n is reported as used both synchronously and
// asynchronously only because sub-module assertions use it to disable
// themselves during reset.
module interpuf_top
  import interpuf_pkg::*;
#(
  parameter int unsigned NUM_CHIPLETS = 4,
  parameter int unsigned MESH         = 4,
  parameter int unsigned LINK_W       = 8,
  parameter int unsigned DEVICE_SEED  = 32'h1234_5678,
  localparam int unsigned TILES = MESH * MESH,
  localparam int unsigned TW    = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned CW    = (NUM_CHIPLETS > 1) ? $clog2(NUM_CHIPLETS) : 1,
  localparam int unsigned PW    = $clog2(NUM_PAIRS),
  localparam int unsigned ZW    = $clog2(N_STAGES + 1),
  localparam int unsigned JW    = $clog2(NUM_CAND)
) (
  input  logic              clk,
  input  logic              rst_n,
  // mesh data plane
  input  logic              mesh_cfg_we,
  input  logic [TW-1:0]     mesh_cfg_tile,
  input  logic [14:0]       mesh_cfg_sel,
  input  logic [LINK_W-1:0] mesh_in  [TILES],
  output logic [LINK_W-1:0] mesh_out [TILES],
  // PUF controller
  input  logic              ctrl_start,
  input  ctrl_cmd_e         ctrl_cmd,
  input  chal_t             ch,
  input  obf_key_t          obf_key,
  input  logic              zenroll,
  input  logic [NUM_CAND-1:0] helper_in,
  input  digest_t           rstar_golden,
  output logic              ctrl_busy,
  output logic              ctrl_done,
  output logic              enroll_ok,
  output digest_t           rstar,
  output logic [NUM_CAND-1:0] helper_out,
  output logic              puf_ok,
  output logic [NUM_PAIRS-1:0] drift_flags,
  output logic [NUM_PAIRS-1:0] outlier_flags,
  output logic              tamper_any,
  input  logic [PW-1:0]     zrd_pair,
  output logic [ZW-1:0]     zrd_val,
  output logic [JW:0]       stat_stable,
  output logic [JW:0]       stat_filtered,
  output logic [15:0]       stat_evals,
  input  logic [PW-1:0]     trojan_pair,
  input  logic [DLY_W-1:0]  trojan_dly,
  // session binding
  input  logic              sess_start,
  input  epoch_t            epoch,
  input  nonce_t            nonce,
  output logic              sess_done,
  output logic              session_ok,
  output digest_t           salt,
  // chiplets
  input  id_t               chip_id  [NUM_CHIPLETS],
  input  sig_t              chip_sig [NUM_CHIPLETS],
  input  tag_t              enroll_tag,
  input  logic [NUM_CHIPLETS-1:0] chip_start,
  output logic [NUM_CHIPLETS-1:0] chip_done,
  output logic [NUM_CHIPLETS-1:0] chip_busy,
  // verifier
  input  logic              commit_we,
  input  logic [CW-1:0]     commit_idx,
  output logic              commit_refused,
  input  logic              auth_req,
  input  logic [CW-1:0]     auth_idx,
  output logic              auth_busy,
  output logic              auth_done,
  output auth_res_e         auth_res,
  output logic              auth_b,
  output digest_t           auth_token,
  output logic [CW-1:0]     auth_res_idx,
  input  logic              new_epoch,
  input  logic [NUM_CHIPLETS-1:0] subset_mask,
  output logic [NUM_CHIPLETS-1:0] accepted,
  output logic [NUM_CHIPLETS-1:0] locked,
  output logic              quorum_ok,
  input  logic [2:0]        log_rd_idx,
  output digest_t           log_token,
  output logic [3:0]        log_count
);

  // ---------------------------------------------------------------- mesh
  interposer_mesh #(.MESH(MESH), .LINK_W(LINK_W)) u_mesh (
    .clk, .rst_n, .cfg_we(mesh_cfg_we), .cfg_tile(mesh_cfg_tile), .cfg_sel(mesh_cfg_sel),
    .local_in(mesh_in), .local_out(mesh_out));

  // ------------------------------------------------------------ route PUF
  logic [PW-1:0]    puf_pair;
  stage_cfg_t       cfg_a, cfg_b;
  logic             arb_sample, arb_valid, arb_resp;
  logic [DLY_W-1:0] dly_a, dly_b, extra_b;

  assign extra_b = (puf_pair == trojan_pair) ? trojan_dly : '0;

  delay_chain_model #(.DEVICE_SEED(DEVICE_SEED), .ROUTE(0)) u_route_a (
    .pair(puf_pair), .cfg(cfg_a), .extra_dly('0), .delay(dly_a));
  delay_chain_model #(.DEVICE_SEED(DEVICE_SEED), .ROUTE(1)) u_route_b (
    .pair(puf_pair), .cfg(cfg_b), .extra_dly(extra_b), .delay(dly_b));
  diff_arbiter_model u_arb (
    .clk, .rst_n, .sample(arb_sample), .delay_a(dly_a), .delay_b(dly_b),
    .resp_valid(arb_valid), .resp(arb_resp));

  auth_controller u_ctrl (
    .clk, .rst_n, .start(ctrl_start), .cmd(ctrl_cmd), .ch, .key(obf_key), .zenroll,
    .helper_in, .rstar_golden, .puf_pair, .puf_cfg_a(cfg_a), .puf_cfg_b(cfg_b),
    .arb_sample, .arb_valid, .arb_resp, .busy(ctrl_busy), .done(ctrl_done), .enroll_ok,
    .rstar, .helper_out, .puf_ok, .drift_flags, .outlier_flags, .tamper_any,
    .zrd_pair, .zrd_val, .stat_stable, .stat_filtered, .stat_evals);

  // -------------------------------------------------------- session salt
  logic sess_busy;
  session_binder u_sess (
    .clk, .rst_n, .start(sess_start), .rstar(rstar_golden), .ch, .epoch, .puf_ok,
    .busy(sess_busy), .done(sess_done), .salt, .session_ok);

  // ------------------------------------------------------------ chiplets
  digest_t gsig [NUM_CHIPLETS];
  for (genvar i = 0; i < NUM_CHIPLETS; i++) begin : g_chip
    chiplet_enc u_enc (
      .clk, .rst_n, .start(chip_start[i]), .id(chip_id[i]), .sig(chip_sig[i]),
      .rstar(rstar_golden), .tag(enroll_tag), .busy(chip_busy[i]), .done(chip_done[i]),
      .gsig(gsig[i]));
  end

  // ------------------------------------------------------------ verifier
  logic [NUM_CHIPLETS-1:0] enrolled;
  logic [CW-1:0] log_chip;
  chal_t         log_ch;
  epoch_t        log_epoch;
  nonce_t        log_nonce;

  auth_verifier #(.NUM_CHIPLETS(NUM_CHIPLETS)) u_ver (
    .clk, .rst_n, .g_we(commit_we), .g_idx(commit_idx), .g_data(gsig[commit_idx]),
    .g_refused(commit_refused), .req(auth_req), .req_idx(auth_idx), .req_gsig(gsig[auth_idx]),
    .req_salt(salt), .req_nonce(nonce), .req_puf_ok(session_ok), .req_ch(ch),
    .req_epoch(epoch), .busy(auth_busy), .done(auth_done), .res_idx(auth_res_idx),
    .res(auth_res), .b(auth_b), .token(auth_token), .new_epoch, .subset_mask, .accepted,
    .enrolled, .quorum_ok, .locked, .log_rd_idx, .log_chip, .log_ch, .log_epoch,
    .log_nonce, .log_token, .log_count);

endmodule
