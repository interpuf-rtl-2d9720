// auth_controller: the interposer's authentication controller. It sequences
// the challenge scheduler (with its challenge obfuscator), the delay stages
// and differential arbiter (outside this module, on the mesh), the
// majority/reliability unit, the response obfuscator and the Z* monitor.
//
// One PUF evaluation takes 6 cycles: 1 scheduling cycle, then 5 evaluation
// cycles (apply configuration, launch, propagate, arbiter sample, vote). Each
// candidate bit is evaluated K = 16 times and then judged in one more cycle.
// Commands (cmd, taken on start while idle):
//  * CMD_ENROLL: walks the 640 candidates (80 pairs x 8 permutations); every
//    candidate with at most ENROLL_MAX_FLIPS flips (0: all 16 outcomes agree)
//    is appended to the response string and marked in the
//    helper mask, until 256 bits are held; then R* = SHA256(bits). enroll_ok
//    is 0 if the candidates run out first.
//  * CMD_VERIFY: re-evaluates only the candidates marked in helper_in, hashes
//    them and sets puf_ok = 1 when every one was still stable (at most
//    MAX_FLIPS flips, a looser field threshold) and the digest
//    equals rstar_golden.
//  * CMD_ZCHECK: for every pair, sweeps z = 0..N on route B (A all crossed)
//    and reports the first z at which B wins stably (N if none) to the Z*
//    monitor, which stores it (zenroll = 1) or checks it for drift.
// done pulses at the end of a command. Statistics outputs count stable and
// filtered candidates. The block list follows the paper's controller figure;
// the candidate ordering, helper mask and state machine are this design's.
//
// Lint notes: the voter's done and ones count, the response hasher's busy
// and the monitor's Z* sum are not needed by this sequencer (it counts the K
// outcomes itself) and are reported unused. rst_n is reported as used both
// synchronously and asynchronously only because the assertion below uses it
// in its disable condition; all flops use it as an asynchronous reset.
module auth_controller
  import interpuf_pkg::*;
#(
  parameter int unsigned K         = 16,
  parameter int unsigned MAX_FLIPS = 2,
  parameter int unsigned ENROLL_MAX_FLIPS = 0,
  parameter int unsigned BAND      = 2,
  parameter int unsigned AVG_BAND  = 4,
  localparam int unsigned PW = $clog2(NUM_PAIRS),
  localparam int unsigned KW = $clog2(NUM_PERMS),
  localparam int unsigned ZW = $clog2(N_STAGES + 1),
  localparam int unsigned JW = $clog2(NUM_CAND),
  localparam int unsigned RW = $clog2(K + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  ctrl_cmd_e       cmd,
  input  chal_t           ch,
  input  obf_key_t        key,
  input  logic            zenroll,
  input  logic [NUM_CAND-1:0] helper_in,
  input  digest_t         rstar_golden,
  // to / from the delay stages and arbiter
  output logic [PW-1:0]   puf_pair,
  output stage_cfg_t      puf_cfg_a,
  output stage_cfg_t      puf_cfg_b,
  output logic            arb_sample,
  input  logic            arb_valid,
  input  logic            arb_resp,
  // results
  output logic            busy,
  output logic            done,
  output logic            enroll_ok,
  output digest_t         rstar,
  output logic [NUM_CAND-1:0] helper_out,
  output logic            puf_ok,
  output logic [NUM_PAIRS-1:0] drift_flags,
  output logic [NUM_PAIRS-1:0] outlier_flags,
  output logic            tamper_any,
  input  logic [PW-1:0]   zrd_pair,
  output logic [ZW-1:0]   zrd_val,
  output logic [JW:0]     stat_stable,
  output logic [JW:0]     stat_filtered,
  output logic [15:0]     stat_evals
);

  typedef enum logic [2:0] {S_IDLE, S_SKIP, S_EVAL, S_BIT, S_HASH, S_WAIT, S_DONE} state_e;
  state_e    state;
  ctrl_cmd_e cmd_q;
  logic [2:0]    phase;
  logic [RW-1:0] rep;
  logic [JW-1:0] j;
  logic [PW-1:0] zp;
  logic [ZW-1:0] z;
  logic          all_stable;

  // -------------------------------------------------- sub-blocks
  logic sched_req, cfg_valid;
  logic [PW-1:0] cand_pair;
  logic [KW-1:0] cand_perm;
  assign cand_pair = (cmd_q == CMD_ZCHECK) ? zp : PW'(j / NUM_PERMS);
  assign cand_perm = KW'(j % NUM_PERMS);
  assign sched_req = (state == S_EVAL) && (phase == 3'd0);

  challenge_scheduler u_sched (
    .clk, .rst_n, .req(sched_req), .zmode(cmd_q == CMD_ZCHECK),
    .pair(cand_pair), .perm(cand_perm), .z, .ch, .key,
    .cfg_valid, .pair_q(puf_pair), .cfg_a(puf_cfg_a), .cfg_b(puf_cfg_b));

  assign arb_sample = (state == S_EVAL) && (phase == 3'd3);

  logic v_clear, v_done, v_maj, v_stable;
  logic [RW-1:0] v_ones, v_flips;
  logic          v_keep;     // strict enrollment pre-selection
  majority_voter #(.K(K), .MAX_FLIPS(MAX_FLIPS)) u_vote (
    .clk, .rst_n, .clear(v_clear), .in_valid(arb_valid), .in_bit(arb_resp),
    .done(v_done), .maj_bit(v_maj), .stable(v_stable), .ones_q(v_ones), .flips(v_flips));
  assign v_keep = v_stable && (v_flips <= RW'(ENROLL_MAX_FLIPS));

  logic r_clear, r_bit_valid, r_bit, r_finish, r_full, r_busy, r_done;
  logic [8:0] r_count;
  digest_t r_digest;
  response_obfuscator u_resp (
    .clk, .rst_n, .clear(r_clear), .bit_valid(r_bit_valid), .bit_in(r_bit),
    .finish(r_finish), .count(r_count), .full(r_full), .busy(r_busy),
    .done(r_done), .digest(r_digest));

  logic z_valid;
  logic [ZW-1:0] z_report;
  logic [PW+ZW-1:0] zsum;
  zstar_monitor #(.BAND(BAND), .AVG_BAND(AVG_BAND)) u_zmon (
    .clk, .rst_n, .enroll(zenroll), .clear_flags(start && !busy && cmd == CMD_ZCHECK),
    .z_valid, .z_pair(zp), .z_val(z_report), .rd_pair(zrd_pair), .rd_zref(zrd_val),
    .drift_flags, .outlier_flags, .tamper_any, .zsum);

  // -------------------------------------------------- control
  logic last_cand;
  assign last_cand = (j == JW'(NUM_CAND - 1));
  assign busy      = (state != S_IDLE);

  always_comb begin
    v_clear     = (state == S_BIT);
    r_clear     = start && !busy && (cmd != CMD_ZCHECK);
    r_bit_valid = 1'b0;
    r_bit       = v_maj;
    r_finish    = (state == S_HASH);
    z_valid     = 1'b0;
    z_report    = z;
    if (state == S_BIT) begin
      unique case (cmd_q)
        CMD_ENROLL: r_bit_valid = v_keep && !r_full;
        CMD_VERIFY: r_bit_valid = !r_full;
        default: begin
          z_valid = (v_stable && v_maj) || (z == ZW'(N_STAGES));
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; cmd_q <= CMD_ENROLL; phase <= '0; rep <= '0; j <= '0;
      zp <= '0; z <= '0; all_stable <= 1'b0; done <= 1'b0; enroll_ok <= 1'b0;
      rstar <= '0; helper_out <= '0; puf_ok <= 1'b0;
      stat_stable <= '0; stat_filtered <= '0; stat_evals <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cmd_q <= cmd; j <= '0; zp <= '0; z <= '0; phase <= '0; rep <= '0;
          all_stable <= 1'b1;
          stat_stable <= '0; stat_filtered <= '0; stat_evals <= '0;
          if (cmd == CMD_ENROLL) begin helper_out <= '0; enroll_ok <= 1'b0; end
          if (cmd == CMD_VERIFY) begin
            puf_ok <= 1'b0;
            state  <= S_SKIP;
          end else state <= S_EVAL;
        end
        // VERIFY: step over candidates that enrollment did not keep
        S_SKIP: begin
          if (helper_in[j]) state <= S_EVAL;
          else if (last_cand) state <= S_DONE;
          else j <= j + JW'(1);
        end
        S_EVAL: begin
          if (phase == 3'(PUF_EVAL_CYC - 1)) begin
            phase <= '0;
            stat_evals <= stat_evals + 16'd1;
            if (rep == RW'(K - 1)) begin rep <= '0; state <= S_BIT; end
            else rep <= rep + RW'(1);
          end else phase <= phase + 3'd1;
        end
        S_BIT: begin
          if ((cmd_q == CMD_ENROLL) ? v_keep : v_stable) stat_stable <= stat_stable + 1'b1;
          else          stat_filtered <= stat_filtered + 1'b1;
          unique case (cmd_q)
            CMD_ENROLL: begin
              if (v_keep && !r_full) helper_out[j] <= 1'b1;
              if (v_keep && r_count == 9'(DIGEST_W - 1)) state <= S_HASH;
              else if (last_cand) state <= S_DONE;
              else begin j <= j + JW'(1); state <= S_EVAL; end
            end
            CMD_VERIFY: begin
              if (!v_stable) all_stable <= 1'b0;
              if (r_count == 9'(DIGEST_W - 1)) state <= S_HASH;
              else if (last_cand) state <= S_DONE;
              else begin j <= j + JW'(1); state <= S_SKIP; end
            end
            default: begin
              if (z_valid) begin
                z <= '0;
                if (zp == PW'(NUM_PAIRS - 1)) state <= S_DONE;
                else begin zp <= zp + PW'(1); state <= S_EVAL; end
              end else begin
                z <= z + ZW'(1);
                state <= S_EVAL;
              end
            end
          endcase
        end
        S_HASH: state <= S_WAIT;
        S_WAIT: if (r_done) begin
          if (cmd_q == CMD_ENROLL) begin
            rstar     <= r_digest;
            enroll_ok <= 1'b1;
          end else begin
            puf_ok <= all_stable && (r_digest == rstar_golden);
          end
          state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the scheduler answers the cycle after each request
  assert property (@(posedge clk) disable iff (!rst_n) sched_req |=> cfg_valid);

endmodule
