// diff_arbiter_model: behavioural model of the differential arbiter at the
// sink of a path pair. Not synthesizable logic in intent: a real arbiter is a
// latch racing two edges, with metastability near a tie.
//
// On sample, it registers resp = 1 when route B's edge arrives first, i.e.
// when delay_b + noise < delay_a, where noise is drawn from a 16-bit LFSR
// (advanced every cycle) and spread over -NOISE..+NOISE delay steps. The noise
// stands for supply, temperature and metastability effects that make races
// near the decision boundary flip. resp_valid pulses one cycle after sample.
// Comparing arrival times follows the paper; the noise model is this model's.
module diff_arbiter_model
  import interpuf_pkg::*;
#(
  parameter int unsigned NOISE      = 3,
  parameter logic [15:0] LFSR_SEED  = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sample,
  input  logic [DLY_W-1:0] delay_a,
  input  logic [DLY_W-1:0] delay_b,
  output logic             resp_valid,
  output logic             resp
);
  logic [15:0] lfsr;
  int signed   noise;

  always_comb noise = int'(32'(lfsr) % (2 * NOISE + 1)) - int'(NOISE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr       <= LFSR_SEED;
      resp_valid <= 1'b0;
      resp       <= 1'b0;
    end else begin
      lfsr       <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      resp_valid <= sample;
      if (sample) resp <= (int'(delay_b) + noise) < int'(delay_a);
    end
  end

endmodule
