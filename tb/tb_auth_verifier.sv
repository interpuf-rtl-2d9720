// tb_auth_verifier: checks the interposer-side evaluation of f_i.
//  * accept: G' equal to the stored commitment and puf_ok = 1 give b = 1 and
//    T' = SHA256(G' || s || Nonce) from the reference model, in 192 + 4 cycles;
//  * wrong G', puf_ok = 0, unenrolled chiplet and a replayed nonce are
//    rejected with the right reason and a zero token;
//  * three failures in a row lock the chiplet (answered at once), and it is
//    accepted again after the cooldown;
//  * commitments are write-once; quorum over the subset; audit log entries.
module tb_auth_verifier;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;
  localparam int NC = 4, COOL = 64;
  logic clk = 0, rst_n = 0, g_we = 0, req = 0, req_puf_ok = 0, new_epoch = 0;
  logic [1:0] g_idx = '0, req_idx = '0, res_idx, log_chip;
  digest_t g_data = '0, req_gsig = '0, req_salt = '0, token, log_token;
  nonce_t req_nonce = '0, log_nonce;
  chal_t req_ch = '0, log_ch;
  epoch_t req_epoch = '0, log_epoch;
  logic g_refused, busy, done, b, quorum_ok;
  auth_res_e res;
  logic [NC-1:0] subset_mask = '1, accepted, enrolled, locked;
  logic [2:0] log_rd_idx = '0;
  logic [3:0] log_count;
  int checks = 0, failures = 0;
  digest_t G [NC];
  always #5 clk = ~clk;

  auth_verifier #(.NUM_CHIPLETS(NC), .MAX_ATTEMPTS(3), .COOLDOWN(COOL), .QUORUM(3)) dut (.*);

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic digest_t tref(input digest_t g, input digest_t s, input nonce_t n);
    logic [511:0] b1;
    b1 = '0; b1[511 -: 64] = n; b1[447] = 1'b1; b1[63:0] = 64'd576;
    return compress(compress(IV, {g, s}), b1);
  endfunction

  task automatic ask(input int i, input digest_t g, input bit ok, input nonce_t n, output int cyc);
    @(negedge clk);
    req = 1; req_idx = 2'(i); req_gsig = g; req_puf_ok = ok; req_nonce = n;
    for (int k = 0; k < 8; k++) req_salt[32*k +: 32] = $urandom;
    req_ch = $urandom; req_epoch = 32'd7;
    @(negedge clk); req = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      for (int k = 0; k < 8; k++) G[i][32*k +: 32] = $urandom;
      @(negedge clk); g_we = 1; g_idx = 2'(i); g_data = G[i]; @(negedge clk); g_we = 0;
    end
    chk(enrolled == 4'b0111, "enrolled map");
    @(negedge clk); g_we = 1; g_idx = 2'd0; g_data = ~G[0]; @(negedge clk); g_we = 0;
    chk(g_refused, "second commitment write refused");
    // accept chiplets 0..2
    for (int i = 0; i < 3; i++) begin
      ask(i, G[i], 1, 64'(100 + i), cyc);
      chk(res == RES_ACCEPT && b && res_idx == 2'(i), $sformatf("accept %0d", i));
      chk(token == tref(G[i], req_salt, 64'(100 + i)), "token value");
      chk(cyc == 196, $sformatf("accept latency %0d", cyc));
      chk(log_count == 4'(i + 1), "log count");
      chk(log_chip == 2'(i) && log_token == token && log_nonce == 64'(100 + i) && log_epoch == 32'd7, "log entry");
    end
    chk(quorum_ok, "quorum of 3 reached");
    subset_mask = 4'b1001;
    #1 chk(!quorum_ok, "quorum over subset");
    subset_mask = '1;
    // replay of chiplet 1's nonce
    ask(1, G[1], 1, 64'd101, cyc);
    chk(res == RES_REPLAY && !b && token == '0, "replay rejected");
    ask(3, G[0], 1, 64'd5, cyc);
    chk(res == RES_NOT_ENROLLED && !b, "unenrolled rejected");
    ask(2, G[2], 0, 64'd6, cyc);
    chk(res == RES_PUF_FAIL && !b, "puf_ok = 0 rejected");
    // chiplet 0: three bad attempts -> locked
    for (int a = 0; a < 3; a++) begin
      ask(0, ~G[0], 1, 64'(200 + a), cyc);
      chk(res == RES_BAD_COMMIT && !b && token == '0, "bad commitment rejected");
    end
    chk(locked[0], "locked after 3 failures");
    ask(0, G[0], 1, 64'd300, cyc);
    chk(res == RES_LOCKED && cyc <= 4, $sformatf("locked request answered at once (%0d)", cyc));
    repeat (COOL) @(negedge clk);
    chk(!locked[0], "cooldown expired");
    ask(0, G[0], 1, 64'd301, cyc);
    chk(res == RES_ACCEPT && b, "accepted after cooldown");
    new_epoch = 1; @(negedge clk); new_epoch = 0;
    chk(accepted == '0 && !quorum_ok, "new epoch clears acceptances");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
