// delay_chain_model: behavioural model of one route of a path pair, an
// N-stage crossbar delay chain on the interposer. Not synthesizable logic in
// intent: it stands in for the physical wires and switchboxes, whose delays
// come from process variation.
//
// Each stage s of route ROUTE of pair p has a straight and a crossed delay:
//   straight = D_STRAIGHT + v(p, ROUTE, s, 0),  crossed = D_CROSS + v(p, ROUTE, s, 1)
// where v() is a hash of DEVICE_SEED and the stage coordinates reduced to
// 0..VAR_RANGE-1, so every simulated device has its own fixed delay profile.
// The route delay is the sum over the N stages for the given configuration
// (cfg bit 1 = crossed) plus extra_dly, an input that models hidden delay
// (a stealth insertion, extra buffering or a re-route) for self-check tests.
// Combinational; units are arbitrary delay steps. That a crossed stage is
// slower than a straight one follows the paper; the numbers are this model's.
module delay_chain_model
  import interpuf_pkg::*;
#(
  parameter int unsigned DEVICE_SEED = 32'h1234_5678,
  parameter int unsigned ROUTE       = 0,     // 0 = route A, 1 = route B
  parameter int unsigned D_STRAIGHT  = 100,
  parameter int unsigned D_CROSS     = 120,
  parameter int unsigned VAR_RANGE   = 16,
  localparam int unsigned PW = $clog2(NUM_PAIRS)
) (
  input  logic [PW-1:0]    pair,
  input  stage_cfg_t       cfg,
  input  logic [DLY_W-1:0] extra_dly,
  output logic [DLY_W-1:0] delay
);

  function automatic logic [31:0] mix(input logic [31:0] x);
    logic [31:0] h;
    h = x;
    h = h ^ (h >> 16); h = h * 32'h7feb352d;
    h = h ^ (h >> 15); h = h * 32'h846ca68b;
    h = h ^ (h >> 16);
    return h;
  endfunction

  always_comb begin
    logic [31:0] acc;
    logic [31:0] key;
    acc = 32'(extra_dly);
    for (int s = 0; s < N_STAGES; s++) begin
      key = DEVICE_SEED ^ {8'(pair), 8'(ROUTE), 8'(s), 7'd0, cfg[s]};
      acc = acc + (cfg[s] ? D_CROSS : D_STRAIGHT) + (mix(key) % VAR_RANGE);
    end
    delay = DLY_W'(acc);
  end

endmodule
