// zstar_monitor: keeper of the golden-free route self-check thresholds.
//
// Z* of a path pair is the smallest number of straight stages on route B
// (route A all crossed) at which B wins the race under majority voting. The
// controller measures it and reports (z_pair, z_val) on z_valid.
//  * enroll = 1: the value is stored as the pair's reference and added to the
//    population sum, from which the mean Z_avg is taken.
//  * enroll = 0 (field re-check): the pair is flagged when
//      |Z* - Zref[pair]|  > BAND        (drift from its own enrollment), or
//      |Z* - Z_avg|       > AVG_BAND    (outlier against the population);
//    the mean test is done without a divider as
//      |Z* * NUM_PAIRS - sum| > AVG_BAND * NUM_PAIRS.
// Flags are sticky until clear_flags. rd_pair/rd_zref read the stored vector
// out for the designer's repository. The two tests follow the paper; BAND and
// AVG_BAND are this design's numbers, the paper gives none.
module zstar_monitor
  import interpuf_pkg::*;
#(
  parameter int unsigned BAND     = 2,
  parameter int unsigned AVG_BAND = 4,
  localparam int unsigned PW = $clog2(NUM_PAIRS),
  localparam int unsigned ZW = $clog2(N_STAGES + 1),
  localparam int unsigned SW = ZW + PW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enroll,
  input  logic          clear_flags,
  input  logic          z_valid,
  input  logic [PW-1:0] z_pair,
  input  logic [ZW-1:0] z_val,
  input  logic [PW-1:0] rd_pair,
  output logic [ZW-1:0] rd_zref,
  output logic [NUM_PAIRS-1:0] drift_flags,
  output logic [NUM_PAIRS-1:0] outlier_flags,
  output logic          tamper_any,
  output logic [SW-1:0] zsum
);
  logic [ZW-1:0] zref [NUM_PAIRS];
  int signed dref, davg;

  always_comb begin
    dref = int'(z_val) - int'(zref[z_pair]);
    if (dref < 0) dref = -dref;
    davg = int'(z_val) * int'(NUM_PAIRS) - int'(zsum);
    if (davg < 0) davg = -davg;
  end

  assign rd_zref    = zref[rd_pair];
  assign tamper_any = |{drift_flags, outlier_flags};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NUM_PAIRS; p++) zref[p] <= '0;
      zsum          <= '0;
      drift_flags   <= '0;
      outlier_flags <= '0;
    end else begin
      if (clear_flags) begin
        drift_flags   <= '0;
        outlier_flags <= '0;
        if (enroll) zsum <= '0;
      end else if (z_valid) begin
        if (enroll) begin
          zref[z_pair] <= z_val;
          zsum         <= zsum - SW'(zref[z_pair]) + SW'(z_val);
        end else begin
          if (dref > int'(BAND))                   drift_flags[z_pair]   <= 1'b1;
          if (davg > int'(AVG_BAND * NUM_PAIRS))   outlier_flags[z_pair] <= 1'b1;
        end
      end
    end
  end

endmodule
