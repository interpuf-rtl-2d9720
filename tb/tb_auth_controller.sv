// tb_auth_controller: runs the authentication controller against the route
// delay and arbiter models and checks it by snooping the arbiter outcomes
// independently of the controller's own voter:
//  * every PUF evaluation is 6 cycles (arbiter samples 6 cycles apart);
//  * ENROLL keeps exactly the candidates whose 16 outcomes all agree,
//    until 256 bits, and R* equals a reference SHA-256 of those bits;
//  * VERIFY with the helper mask regenerates R* (puf_ok = 1) and fails with a
//    wrong golden digest (puf_ok = 0);
//  * ZCHECK reports, per pair, the first z where B wins stably, and a hidden
//    delay inserted on route B of one pair after enrollment raises its flag.
module tb_auth_controller;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, zenroll = 0;
  ctrl_cmd_e cmd = CMD_ENROLL;
  chal_t ch = 32'hC0FFEE11;
  obf_key_t key = '{taps: 32'h9249_2492, polarity: 32'h5A5A_0FF0, rot: 32'd11};
  logic [NUM_CAND-1:0] helper_in = '0, helper_out;
  digest_t rstar_golden = '0, rstar;
  logic [6:0] puf_pair, zrd_pair = '0;
  stage_cfg_t puf_cfg_a, puf_cfg_b;
  logic arb_sample, arb_valid, arb_resp, busy, done, enroll_ok, puf_ok, tamper_any;
  logic [NUM_PAIRS-1:0] drift_flags, outlier_flags;
  logic [5:0] zrd_val;
  logic [10:0] stat_stable, stat_filtered;
  logic [15:0] stat_evals;
  logic [15:0] dly_a, dly_b, extra_b = '0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  auth_controller dut (.*);
  delay_chain_model #(.ROUTE(0)) u_a (.pair(puf_pair), .cfg(puf_cfg_a), .extra_dly(16'd0), .delay(dly_a));
  delay_chain_model #(.ROUTE(1)) u_b (.pair(puf_pair), .cfg(puf_cfg_b), .extra_dly(extra_b), .delay(dly_b));
  diff_arbiter_model u_arb (.clk, .rst_n, .sample(arb_sample), .delay_a(dly_a), .delay_b(dly_b),
                            .resp_valid(arb_valid), .resp(arb_resp));

  localparam int TROJAN_PAIR = 5;
  always_comb extra_b = (tamper_on && puf_pair == 7'(TROJAN_PAIR)) ? 16'd90 : 16'd0;
  bit tamper_on = 0;

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", s); end
  endtask

  // ---- independent snoop of the arbiter: 16 outcomes per candidate
  int n_out, ones, last_sample, gap_bad;
  logic [255:0] exp_bits;
  int nbits, nstable_seen;
  logic [NUM_CAND-1:0] exp_helper;
  int zlist [NUM_PAIRS];
  bit all_stable_seen;
  int cand_idx;
  always @(posedge clk) begin
    if (arb_sample) begin
      if (last_sample >= 0 && n_out % 16 != 0 && ($time - last_sample) != 60) gap_bad++;
      last_sample = $time;
    end
    if (arb_valid) begin
      ones += arb_resp;
      n_out++;
      if (n_out % 16 == 0) begin
        bit st, mj;
        st = (ones <= 2) || (ones >= 14);
        mj = ones > 8;
        if (cmd == CMD_ENROLL && (ones == 0 || ones == 16) && nbits < 256) begin
          exp_bits[255 - nbits] = mj; nbits++; exp_helper[cand_idx] = 1'b1;
        end
        if (cmd == CMD_VERIFY && nbits < 256) begin
          exp_bits[255 - nbits] = mj; nbits++;
          if (!st) all_stable_seen = 0;
        end
        if (cmd == CMD_ENROLL ? (ones == 0 || ones == 16) : st) nstable_seen++;
        ones = 0;
        cand_idx++;
      end
    end
  end

  task automatic run(input ctrl_cmd_e c);
    int cyc;
    @(negedge clk);
    cmd = c; start = 1;
    n_out = 0; ones = 0; nbits = 0; nstable_seen = 0; last_sample = -1; cand_idx = 0;
    exp_helper = '0; all_stable_seen = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 400000) begin @(negedge clk); cyc++; end
    chk(done, "command finished");
    $display("cmd %0d: %0d cycles, %0d evaluations, stable %0d filtered %0d", c, cyc, stat_evals, stat_stable, stat_filtered);
  endtask

  initial begin
    int zfirst [NUM_PAIRS];
    repeat (3) @(negedge clk);
    rst_n = 1;
    gap_bad = 0;
    // ---------------- enrollment of the route digest
    run(CMD_ENROLL);
    chk(enroll_ok, "enroll ok");
    chk($countones(helper_out) == 256, $sformatf("helper has %0d bits", $countones(helper_out)));
    chk(helper_out == exp_helper, "helper mask = stable candidates");
    chk(nbits == 256, "256 bits");
    chk(rstar == compress(IV, r_block(exp_bits)), "R* = SHA256(stable bits)");
    chk(stat_filtered > 0, "some candidates filtered as unstable");
    chk(gap_bad == 0, "6-cycle evaluation");
    chk(int'(stat_evals) == 16 * cand_idx, "16 evaluations per candidate");
    // ---------------- field regeneration
    helper_in = helper_out; rstar_golden = rstar;
    // in VERIFY the snoop indexes only the selected candidates
    run(CMD_VERIFY);
    chk(puf_ok == (all_stable_seen && compress(IV, r_block(exp_bits)) == rstar), "puf_ok matches snoop");
    chk(puf_ok, "digest regenerated");
    chk(int'(stat_evals) == 16 * 256, "verify evaluates only the helper candidates");
    rstar_golden = ~rstar;
    run(CMD_VERIFY);
    chk(!puf_ok, "wrong golden rejected");
    // ---------------- Z* self-check: enroll, honest re-check, tampered re-check
    zenroll = 1;
    run(CMD_ZCHECK);
    chk(!tamper_any, "no flags at enrollment");
    for (int p = 0; p < NUM_PAIRS; p++) begin
      zrd_pair = 7'(p); #1; zfirst[p] = int'(zrd_val);
    end
    chk(zfirst[0] <= 32, "Z* in range");
    zenroll = 0;
    run(CMD_ZCHECK);
    chk(drift_flags == '0, $sformatf("honest re-check has no drift (%h)", drift_flags));
    tamper_on = 1;
    run(CMD_ZCHECK);
    chk(drift_flags[TROJAN_PAIR], "hidden delay on route B flagged");
    chk($countones(drift_flags) == 1, "only the tampered pair drifts");
    chk(tamper_any, "tamper_any");
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
