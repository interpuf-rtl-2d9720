// auth_log: audit ring buffer of accepted authentications.
//
// Each wr pulse stores one entry {chiplet index, ch, Epoch, Nonce, T'_i} at
// the write pointer; after DEPTH entries the oldest are overwritten. rd_idx 0
// is the newest entry, 1 the one before, and so on; count saturates at DEPTH.
// No secret input is stored. Recording these fields follows the paper; the
// depth and ring organisation are this design's choices.
module auth_log
  import interpuf_pkg::*;
#(
  parameter int unsigned DEPTH  = 8,
  parameter int unsigned CHIP_W = 2,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr,
  input  logic [CHIP_W-1:0] wr_chip,
  input  chal_t             wr_ch,
  input  epoch_t            wr_epoch,
  input  nonce_t            wr_nonce,
  input  digest_t           wr_token,
  input  logic [AW-1:0]     rd_idx,
  output logic [CHIP_W-1:0] rd_chip,
  output chal_t             rd_ch,
  output epoch_t            rd_epoch,
  output nonce_t            rd_nonce,
  output digest_t           rd_token,
  output logic [AW:0]       count
);
  typedef struct packed {
    logic [CHIP_W-1:0] chip;
    chal_t             ch;
    epoch_t            epoch;
    nonce_t            nonce;
    digest_t           token;
  } entry_t;

  entry_t        mem [DEPTH];
  logic [AW-1:0] wp;
  entry_t        rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      count <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (wr) begin
      mem[wp] <= '{chip: wr_chip, ch: wr_ch, epoch: wr_epoch, nonce: wr_nonce, token: wr_token};
      wp      <= (wp == AW'(DEPTH - 1)) ? '0 : wp + AW'(1);
      if (count != (AW+1)'(DEPTH)) count <= count + 1'b1;
    end
  end

  logic [AW:0] slot;
  always_comb begin
    // newest entry sits just below the write pointer
    slot = (AW+1)'(wp) + (AW+1)'(DEPTH) - (AW+1)'(1) - (AW+1)'(rd_idx);
    if (slot >= (AW+1)'(DEPTH)) slot = slot - (AW+1)'(DEPTH);
    rd = mem[slot[AW-1:0]];
  end
  assign rd_chip  = rd.chip;
  assign rd_ch    = rd.ch;
  assign rd_epoch = rd.epoch;
  assign rd_nonce = rd.nonce;
  assign rd_token = rd.token;

endmodule
