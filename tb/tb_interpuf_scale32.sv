// tb_interpuf_scale32: the whole fabric scaled to 32 chiplets on a 6 x 6
// mesh (36 local ports, one per chiplet and four spare), the largest
// chiplet count the paper's scaling study lists. PUF sizes stay at their
// defaults. Sequence: enroll the route digest, hash and commit all 32
// chiplet identities (the 32 hashers run in parallel and must all finish
// in 96 cycles), regenerate the digest in the field, bind a session, then
// authenticate every chiplet in turn. Each authentication must take 196
// cycles and give the reference token. The quorum over all 32 may only be
// met after the last one, and a new epoch clears it. The audit log must hold the newest entries and
// saturate at its depth. Expected values come from the reference SHA-256.
module tb_interpuf_scale32;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;
  localparam int NC = 32, M = 6, T = M * M;

  logic clk = 0, rst_n = 0;
  logic mesh_cfg_we = 0; logic [5:0] mesh_cfg_tile = '0; logic [14:0] mesh_cfg_sel = '0;
  logic [7:0] mesh_in [T]; logic [7:0] mesh_out [T];
  logic ctrl_start = 0; ctrl_cmd_e ctrl_cmd = CMD_ENROLL;
  chal_t ch = 32'h0BAD_F00D;
  obf_key_t obf_key = '{taps: 32'h1357_9BDF, polarity: 32'h0F0F_3C3C, rot: 32'd11};
  logic zenroll = 0;
  logic [NUM_CAND-1:0] helper_in = '0, helper_out;
  digest_t rstar_golden = '0, rstar, salt, auth_token, log_token;
  logic ctrl_busy, ctrl_done, enroll_ok, puf_ok, tamper_any;
  logic [NUM_PAIRS-1:0] drift_flags, outlier_flags;
  logic [6:0] zrd_pair = '0, trojan_pair = '0; logic [5:0] zrd_val;
  logic [10:0] stat_stable, stat_filtered; logic [15:0] stat_evals;
  logic [15:0] trojan_dly = '0;
  logic sess_start = 0, sess_done, session_ok;
  epoch_t epoch = 32'd7; nonce_t nonce = 64'h5151_0000_0000_0001;
  id_t chip_id [NC]; sig_t chip_sig [NC]; tag_t enroll_tag = 32'hE0E0_0032;
  logic [NC-1:0] chip_start = '0, chip_done, chip_busy;
  logic commit_we = 0; logic [4:0] commit_idx = '0; logic commit_refused;
  logic auth_req = 0; logic [4:0] auth_idx = '0, auth_res_idx;
  logic auth_busy, auth_done, auth_b; auth_res_e auth_res;
  logic new_epoch = 0; logic [NC-1:0] subset_mask = '1, accepted, locked; logic quorum_ok;
  logic [2:0] log_rd_idx = '0; logic [3:0] log_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  interpuf_top #(.NUM_CHIPLETS(NC), .MESH(M)) dut (.*);

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

  initial begin
    int cyc, max_cyc;
    digest_t exp_tok [NC];
    for (int t = 0; t < T; t++) mesh_in[t] = '0;
    for (int i = 0; i < NC; i++) begin
      chip_id[i] = 32'hC1D0_0000 + 32'(i); chip_sig[i] = {$urandom, $urandom};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- mesh: corner tile 0 to the opposite corner tile 35 (10 hops)
    // east along row 0 to tile 5, then south down column 5
    @(negedge clk); mesh_cfg_we = 1;
    for (int x = 0; x < M; x++) begin
      mesh_cfg_tile = 6'(x);
      if (x == 0)          mesh_cfg_sel = {DIR_OFF, DIR_OFF, DIR_OFF, DIR_LOCAL, DIR_OFF};
      else if (x < M - 1)  mesh_cfg_sel = {DIR_OFF, DIR_OFF, DIR_OFF, DIR_WEST, DIR_OFF};
      else                 mesh_cfg_sel = {DIR_OFF, DIR_OFF, DIR_WEST, DIR_OFF, DIR_OFF};
      @(negedge clk);
    end
    for (int y = 1; y < M; y++) begin
      mesh_cfg_tile = 6'(y * M + M - 1);
      if (y < M - 1) mesh_cfg_sel = {DIR_OFF, DIR_OFF, DIR_NORTH, DIR_OFF, DIR_OFF};
      else           mesh_cfg_sel = {DIR_NORTH, DIR_OFF, DIR_OFF, DIR_OFF, DIR_OFF};
      @(negedge clk);
    end
    mesh_cfg_we = 0; mesh_in[0] = 8'hC3;
    @(negedge clk); mesh_in[0] = 8'h00;
    cyc = 1; while (mesh_out[T-1] != 8'hC3 && cyc < 40) begin @(negedge clk); cyc++; end
    chk(mesh_out[T-1] == 8'hC3 && cyc == 2 * M - 1, $sformatf("corner-to-corner route after %0d cycles", cyc));

    // ---- enrollment
    ctrl(CMD_ENROLL);
    chk(enroll_ok, "route digest enrolled");
    rstar_golden = rstar; helper_in = helper_out;

    // all 32 chiplet hashers in parallel, 96 cycles
    @(negedge clk); chip_start = '1; @(negedge clk); chip_start = '0;
    cyc = 1; while (!(&chip_done) && cyc < 200) begin @(negedge clk); cyc++; end
    chk(cyc == SHA_CYCLES, $sformatf("32 chiplet hashes done together after %0d cycles", cyc));
    while (|chip_busy) @(negedge clk);
    for (int i = 0; i < NC; i++) begin
      @(negedge clk); commit_we = 1; commit_idx = 5'(i); @(negedge clk); commit_we = 0;
      chk(!commit_refused, "commitment stored");
    end

    // ---- field regeneration and session
    ctrl(CMD_VERIFY);
    chk(puf_ok, "digest regenerated");
    @(negedge clk); sess_start = 1; @(negedge clk); sess_start = 0;
    while (!sess_done) @(negedge clk);
    chk(session_ok && salt == s_ref(rstar_golden, ch, epoch), "session salt");

    // ---- authenticate all 32 in turn
    max_cyc = 0;
    for (int i = 0; i < NC; i++) begin
      exp_tok[i] = t_ref(g_ref(i, rstar_golden), salt, nonce);
      @(negedge clk); auth_req = 1; auth_idx = 5'(i); @(negedge clk); auth_req = 0;
      cyc = 1; while (!auth_done && cyc < 1000) begin @(negedge clk); cyc++; end
      if (cyc > max_cyc) max_cyc = cyc;
      chk(auth_res == RES_ACCEPT && auth_b && auth_res_idx == 5'(i), $sformatf("chiplet %0d accepted", i));
      chk(auth_token == exp_tok[i], $sformatf("chiplet %0d token", i));
      chk(quorum_ok == (i == NC - 1), $sformatf("quorum after %0d acceptances", i + 1));
    end
    chk(max_cyc == 196, $sformatf("authentication latency %0d cycles", max_cyc));
    chk(accepted == '1, "all accepted");

    // ---- audit log holds the newest 8 entries, newest first
    chk(log_count == 4'd8, "log saturated at its depth");
    for (int k = 0; k < 8; k++) begin
      @(negedge clk); log_rd_idx = 3'(k); @(negedge clk);
      chk(log_token == exp_tok[NC - 1 - k], $sformatf("log entry %0d", k));
    end

    // ---- a new epoch clears the acceptances and the quorum
    @(negedge clk); new_epoch = 1; @(negedge clk); new_epoch = 0;
    chk(accepted == '0 && !quorum_ok, "new epoch clears acceptances");

    $display("scale: %0d chiplets, %0d tiles, authentication %0d cycles", NC, T, max_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
