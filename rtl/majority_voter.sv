// majority_voter: K-fold repetition filter for one PUF response bit.
//
// clear starts a new bit. Each in_valid pulse adds one arbiter outcome. After
// K outcomes, done pulses with the majority value and a stable flag. A bit is
// stable when the minority count (flips, also an output) is at most MAX_FLIPS,
// i.e. its flip rate is below tau = (MAX_FLIPS + 1) / K; a tie is never
// stable. The paper gives K-fold majority voting and a flip-rate threshold tau
// without numbers; K = 16 is the number of 6-cycle evaluations that fit in one
// 96-cycle SHA-256 window, and MAX_FLIPS = 2 is this design's choice.
module majority_voter #(
  parameter int unsigned K         = 16,
  parameter int unsigned MAX_FLIPS = 2,
  localparam int unsigned CW = $clog2(K + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  input  logic in_bit,
  output logic done,
  output logic maj_bit,
  output logic stable,
  output logic [CW-1:0] ones_q,
  output logic [CW-1:0] flips
);
  logic [CW-1:0] n_q;
  logic [CW-1:0] ones_n, n_n, zeros_n, minority;

  always_comb begin
    n_n     = n_q + CW'(1);
    ones_n  = ones_q + CW'(in_bit);
    zeros_n = n_n - ones_n;
    minority = (ones_n < zeros_n) ? ones_n : zeros_n;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q <= '0; ones_q <= '0; done <= 1'b0; maj_bit <= 1'b0; stable <= 1'b0; flips <= '0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        n_q <= '0; ones_q <= '0;
      end else if (in_valid && n_q < CW'(K)) begin
        n_q    <= n_n;
        ones_q <= ones_n;
        if (n_n == CW'(K)) begin
          done    <= 1'b1;
          maj_bit <= (ones_n > zeros_n);
          stable  <= (ones_n != zeros_n) && (minority <= CW'(MAX_FLIPS));
          flips   <= minority;
        end
      end
    end
  end

endmodule
