// tb_interpuf_top: end-to-end run of the whole fabric at its default sizes
// (4 x 4 mesh, 80 path pairs x 8 permutations, 32-stage routes, 4 chiplets).
// Expected digests, salts and tokens come from the reference SHA-256 model.
// Sequence: mesh route programming and data transfer; enrollment of the
// route digest and of the Z* vector; chiplet commitments; field
// regeneration of the digest running concurrently with chiplet hashing;
// session binding; authentication of every chiplet and quorum; a counterfeit
// chiplet rejected until it is locked out; a replayed nonce; a fresh session
// giving an unlinkable token; a hidden route delay caught by the Z*
// re-check; a wrong golden digest making every authentication fail.
// Each mechanism is counted and must occur at least once.
module tb_interpuf_top;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;
  localparam int NC = 4, T = 16;

  logic clk = 0, rst_n = 0;
  logic mesh_cfg_we = 0; logic [3:0] mesh_cfg_tile = '0; logic [14:0] mesh_cfg_sel = '0;
  logic [7:0] mesh_in [T]; logic [7:0] mesh_out [T];
  logic ctrl_start = 0; ctrl_cmd_e ctrl_cmd = CMD_ENROLL;
  chal_t ch = 32'h5EED_0001;
  obf_key_t obf_key = '{taps: 32'h2492_4925, polarity: 32'hA5C3_0F96, rot: 32'd5};
  logic zenroll = 0;
  logic [NUM_CAND-1:0] helper_in = '0, helper_out;
  digest_t rstar_golden = '0, rstar, salt, auth_token, log_token;
  logic ctrl_busy, ctrl_done, enroll_ok, puf_ok, tamper_any;
  logic [NUM_PAIRS-1:0] drift_flags, outlier_flags;
  logic [6:0] zrd_pair = '0, trojan_pair = 7'd9; logic [5:0] zrd_val;
  logic [10:0] stat_stable, stat_filtered; logic [15:0] stat_evals;
  logic [15:0] trojan_dly = '0;
  logic sess_start = 0, sess_done, session_ok;
  epoch_t epoch = 32'd1; nonce_t nonce = 64'h0123_4567_89AB_CDEF;
  id_t chip_id [NC]; sig_t chip_sig [NC]; tag_t enroll_tag = 32'hE0E0_0001;
  logic [NC-1:0] chip_start = '0, chip_done, chip_busy;
  logic commit_we = 0; logic [1:0] commit_idx = '0; logic commit_refused;
  logic auth_req = 0; logic [1:0] auth_idx = '0, auth_res_idx;
  logic auth_busy, auth_done, auth_b; auth_res_e auth_res;
  logic new_epoch = 0; logic [NC-1:0] subset_mask = '1, accepted, locked; logic quorum_ok;
  logic [2:0] log_rd_idx = '0; logic [3:0] log_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  interpuf_top dut (.*);

  // mechanism counters
  int m_route = 0, m_enroll = 0, m_filter = 0, m_zenroll = 0, m_verify = 0, m_overlap = 0,
      m_session = 0, m_accept = 0, m_quorum = 0, m_badcommit = 0, m_lock = 0, m_replay = 0,
      m_fresh = 0, m_tamper = 0, m_pufless = 0, m_refuse = 0;
  always @(posedge clk) if (ctrl_busy && |chip_busy) m_overlap++;

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic digest_t g_ref(input int i, input digest_t r);
    logic [511:0] b; b = '0; b[511:128] = {chip_id[i], chip_sig[i], r, enroll_tag};
    b[127] = 1'b1; b[63:0] = 64'd384; return compress(IV, b);
  endfunction
  function automatic digest_t s_ref(input digest_t r, input chal_t c, input epoch_t e);
    logic [511:0] b; b = '0; b[511:192] = {r, c, e}; b[191] = 1'b1; b[63:0] = 64'd320;
    return compress(IV, b);
  endfunction
  function automatic digest_t t_ref(input digest_t g, input digest_t s, input nonce_t n);
    logic [511:0] b; b = '0; b[511 -: 64] = n; b[447] = 1'b1; b[63:0] = 64'd576;
    return compress(compress(IV, {g, s}), b);
  endfunction

  task automatic ctrl(input ctrl_cmd_e c);
    @(negedge clk); ctrl_cmd = c; ctrl_start = 1; @(negedge clk); ctrl_start = 0;
    while (!ctrl_done) @(negedge clk);
  endtask
  task automatic hash_chips(input logic [NC-1:0] m);
    @(negedge clk); chip_start = m; @(negedge clk); chip_start = '0;
    while (|chip_busy) @(negedge clk);
  endtask
  task automatic bind_session();
    @(negedge clk); sess_start = 1; @(negedge clk); sess_start = 0;
    while (!sess_done) @(negedge clk);
  endtask
  task automatic auth(input int i);
    @(negedge clk); auth_req = 1; auth_idx = 2'(i); @(negedge clk); auth_req = 0;
    while (!auth_done) @(negedge clk);
  endtask

  initial begin
    digest_t tok0_first;
    int cyc;
    for (int t = 0; t < T; t++) mesh_in[t] = '0;
    for (int i = 0; i < NC; i++) begin chip_id[i] = 32'hC0DE_0000 + 32'(i); chip_sig[i] = {$urandom, $urandom}; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- 1. mesh: tile 0 -> east -> tile 1 -> south -> tile 5
    @(negedge clk); mesh_cfg_we = 1; mesh_cfg_tile = 4'd0; mesh_cfg_sel = {DIR_OFF, DIR_OFF, DIR_OFF, DIR_LOCAL, DIR_OFF};
    @(negedge clk); mesh_cfg_tile = 4'd1; mesh_cfg_sel = {DIR_OFF, DIR_OFF, DIR_WEST, DIR_OFF, DIR_OFF};
    @(negedge clk); mesh_cfg_tile = 4'd5; mesh_cfg_sel = {DIR_NORTH, DIR_OFF, DIR_OFF, DIR_OFF, DIR_OFF};
    @(negedge clk); mesh_cfg_we = 0; mesh_in[0] = 8'h5A;
    @(negedge clk); mesh_in[0] = 8'h00;
    cyc = 1; while (mesh_out[5] != 8'h5A && cyc < 10) begin @(negedge clk); cyc++; end
    chk(mesh_out[5] == 8'h5A && cyc == 3, $sformatf("mesh route delivered after %0d hops", cyc));
    if (mesh_out[5] == 8'h5A) m_route++;

    // ---- 2. enrollment (trusted tester)
    ctrl(CMD_ENROLL);
    chk(enroll_ok && $countones(helper_out) == 256, "route digest enrolled");
    if (enroll_ok) m_enroll++;
    if (stat_filtered > 0) m_filter++;
    $display("enroll: %0d candidates stable, %0d filtered", stat_stable, stat_filtered);
    rstar_golden = rstar; helper_in = helper_out;
    zenroll = 1; ctrl(CMD_ZCHECK); zenroll = 0;
    chk(!tamper_any, "Z* enrollment clean"); m_zenroll++;
    hash_chips('1);
    for (int i = 0; i < NC; i++) begin
      @(negedge clk); commit_we = 1; commit_idx = 2'(i); @(negedge clk); commit_we = 0;
    end
    // a second commitment for the same chiplet is refused (one-time binding)
    @(negedge clk); commit_we = 1; commit_idx = 2'd2; @(negedge clk); commit_we = 0;
    chk(commit_refused, "second commitment refused");
    if (commit_refused) m_refuse++;

    // ---- 3. field: regenerate the digest while the chiplets hash
    @(negedge clk); ctrl_cmd = CMD_VERIFY; ctrl_start = 1; chip_start = '1;
    @(negedge clk); ctrl_start = 0; chip_start = '0;
    while (!ctrl_done) @(negedge clk);
    $display("verify: %0d stable, %0d filtered", stat_stable, stat_filtered);
    chk(puf_ok, "digest regenerated in the field"); if (puf_ok) m_verify++;
    chk(m_overlap > 0, "PUF evaluation overlapped chiplet hashing");
    bind_session();
    chk(session_ok && salt == s_ref(rstar_golden, ch, epoch), "session salt"); if (session_ok) m_session++;
    for (int i = 0; i < NC; i++) begin
      auth(i);
      chk(auth_res == RES_ACCEPT && auth_b, $sformatf("chiplet %0d accepted", i));
      chk(auth_token == t_ref(g_ref(i, rstar_golden), salt, nonce), "token value");
      if (auth_b) m_accept++;
      if (i == 0) tok0_first = auth_token;
    end
    chk(quorum_ok, "quorum"); if (quorum_ok) m_quorum++;
    chk(log_count == 4'd4 && log_token == auth_token, "audit log");

    // ---- 4. replay of chiplet 0 with the same nonce
    auth(0);
    chk(auth_res == RES_REPLAY && !auth_b, "replay rejected"); if (auth_res == RES_REPLAY) m_replay++;

    // ---- 5. counterfeit chiplet 3: wrong silicon secret, locked after 3 tries
    chip_sig[3] = ~chip_sig[3];
    hash_chips(4'b1000);
    for (int a = 0; a < 3; a++) begin
      nonce = nonce + 1;
      auth(3);
      chk(auth_res == RES_BAD_COMMIT && !auth_b && auth_token == '0, "counterfeit rejected");
      if (auth_res == RES_BAD_COMMIT) m_badcommit++;
    end
    auth(3);
    chk(auth_res == RES_LOCKED && locked[3], "counterfeit locked out"); if (auth_res == RES_LOCKED) m_lock++;

    // ---- 6. new session: fresh epoch and nonce give an unlinkable token
    @(negedge clk); new_epoch = 1; @(negedge clk); new_epoch = 0;
    epoch = epoch + 1; nonce = 64'hFEED_0000_0000_0001;
    bind_session();
    auth(0);
    chk(auth_b && auth_token == t_ref(g_ref(0, rstar_golden), salt, nonce), "fresh session accepted");
    chk(auth_token != tok0_first, "token differs across sessions");
    if (auth_b && auth_token != tok0_first) m_fresh++;
    chk(!quorum_ok, "quorum not met in new epoch with one chiplet");

    // ---- 7. route tampering: hidden delay on route B of one pair
    trojan_dly = 16'd90;
    ctrl(CMD_ZCHECK);
    chk(tamper_any && drift_flags[trojan_pair], "tampered route flagged");
    chk($countones(drift_flags) == 1, "only that pair flagged");
    if (tamper_any) m_tamper++;
    trojan_dly = '0;

    // ---- 8. wrong golden digest: puf_ok = 0, every authentication fails
    rstar_golden[0] = ~rstar_golden[0];
    ctrl(CMD_VERIFY);
    chk(!puf_ok, "wrong golden digest: puf_ok = 0");
    nonce = nonce + 1;
    bind_session();
    chk(!session_ok, "session not ok");
    auth(1);
    chk(!auth_b && auth_res != RES_ACCEPT, "authentication refused without puf_ok");
    if (!auth_b) m_pufless++;

    // ---- mechanism coverage
    chk(m_route > 0, "mechanism: mesh routing");
    chk(m_enroll > 0, "mechanism: digest enrollment");
    chk(m_filter > 0, "mechanism: stability filtering");
    chk(m_zenroll > 0, "mechanism: Z* enrollment");
    chk(m_verify > 0, "mechanism: digest regeneration");
    chk(m_overlap > 0, "mechanism: PUF / chiplet hashing overlap");
    chk(m_session > 0, "mechanism: session binding");
    chk(m_accept > 0, "mechanism: acceptance");
    chk(m_quorum > 0, "mechanism: quorum");
    chk(m_replay > 0, "mechanism: replay rejection");
    chk(m_badcommit > 0, "mechanism: counterfeit rejection");
    chk(m_lock > 0, "mechanism: attempt lockout");
    chk(m_fresh > 0, "mechanism: fresh session token");
    chk(m_tamper > 0, "mechanism: tamper detection");
    chk(m_pufless > 0, "mechanism: puf_ok gating");
    chk(m_refuse > 0, "mechanism: write-once commitment");
    $display("mechanisms: route %0d enroll %0d filter %0d zenroll %0d verify %0d overlap-cycles %0d session %0d accept %0d quorum %0d replay %0d counterfeit %0d lockout %0d fresh %0d tamper %0d puf-gate %0d refuse %0d",
             m_route, m_enroll, m_filter, m_zenroll, m_verify, m_overlap, m_session, m_accept, m_quorum,
             m_replay, m_badcommit, m_lock, m_fresh, m_tamper, m_pufless, m_refuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
