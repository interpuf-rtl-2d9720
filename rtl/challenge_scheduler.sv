// challenge_scheduler: turns the controller's request into the stage
// configuration of one differential race, in a single cycle.
//
// Digest mode (zmode = 0): candidate j = pair * NUM_PERMS + perm gets its own
// challenge c_j = ch XOR (j * 0x9E3779B9), which is passed through the
// challenge obfuscator; both routes A and B of the pair get the same
// obfuscated configuration, so only process variation decides the race.
// Self-check mode (zmode = 1): route A is all-crossed and route B has its
// first z stages straight and the rest crossed (the Z* sweep of the paper's
// golden-free self-check).
// Timing: req is registered; one cycle later cfg_valid is high with pair_q,
// cfg_a and cfg_b. This is the paper's one cycle of challenge scheduling; the
// per-candidate constant is this design's choice.
module challenge_scheduler
  import interpuf_pkg::*;
#(
  localparam int unsigned PW = $clog2(NUM_PAIRS),
  localparam int unsigned KW = $clog2(NUM_PERMS),
  localparam int unsigned ZW = $clog2(N_STAGES + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        zmode,
  input  logic [PW-1:0] pair,
  input  logic [KW-1:0] perm,
  input  logic [ZW-1:0] z,
  input  chal_t       ch,
  input  obf_key_t    key,
  output logic        cfg_valid,
  output logic [PW-1:0] pair_q,
  output stage_cfg_t  cfg_a,
  output stage_cfg_t  cfg_b
);

  chal_t c_j, c_obf;
  logic [31:0] j;
  always_comb begin
    j   = 32'(pair) * NUM_PERMS + 32'(perm);
    c_j = ch ^ chal_t'(j * 32'h9E3779B9);
  end

  challenge_obfuscator u_obf (.key, .ch_in(c_j), .ch_out(c_obf));

  stage_cfg_t zcfg;
  always_comb begin
    zcfg = '1;
    for (int i = 0; i < N_STAGES; i++) if (i < int'(z)) zcfg[i] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_valid <= 1'b0;
      pair_q    <= '0;
      cfg_a     <= '1;
      cfg_b     <= '1;
    end else begin
      cfg_valid <= req;
      if (req) begin
        pair_q <= pair;
        if (zmode) begin
          cfg_a <= '1;
          cfg_b <= zcfg;
        end else begin
          cfg_a <= stage_cfg_t'(c_obf);
          cfg_b <= stage_cfg_t'(c_obf);
        end
      end
    end
  end

endmodule
