// sha256_core: one SHA-256 compression of a 512-bit block in 96 clock cycles.
//
// The cycle budget follows the paper's timing diagram: 16 cycles of message
// scheduling, 64 compression rounds and 16 cycles of digest distribution.
//  * SCHED: one 32-bit message word per cycle is loaded into a 16-word window.
//  * COMP : one round per cycle; the window shifts and the next schedule word
//           W[t+16] is computed on the fly, so only 16 words are stored.
//  * DIST : the first cycle adds the working variables to the chaining value;
//           the 16 cycles drive the digest out 16 bits at a time on dist_data
//           (most significant half-word first) for a narrow on-interposer bus.
// Interface: pulse start (accepted only while !busy) with block and h_in
// (SHA256_IV for the first block of a message, the previous h_out for the
// next one). done is high in the 96th cycle after the start cycle (the start cycle is
// the first schedule cycle); h_out then holds
// the new chaining value and stays until the next start. The split into
// phases is the paper's; the serial load and the 16-bit distribution bus are
// this design's reading of "Sched" and "Dist".
module sha256_core
  import interpuf_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  block_t       block,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out,
  output logic         dist_valid,
  output logic [15:0]  dist_data
);

  typedef enum logic [1:0] {S_IDLE, S_SCHED, S_COMP, S_DIST} state_e;
  state_e      state;
  logic [6:0]  cnt;
  logic [31:0] w [16];
  logic [511:0] blk_q;
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [255:0] hin_q;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] s0, s1, ch, maj, t1, t2, wnew, sig0, sig1;
  always_comb begin
    s1   = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch   = (e & f) ^ (~e & g);
    t1   = h + s1 + ch + SHA256_K[cnt[5:0]] + w[0];
    s0   = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj  = (a & b) ^ (a & c) ^ (b & c);
    t2   = s0 + maj;
    sig0 = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    sig1 = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    wnew = sig1 + w[9] + sig0 + w[0];
  end

  assign busy      = (state != S_IDLE);
  assign dist_valid = (state == S_DIST);
  logic [255:0] h_sum;
  assign h_sum = {hin_q[255:224] + a, hin_q[223:192] + b, hin_q[191:160] + c, hin_q[159:128] + d,
                  hin_q[127:96]  + e, hin_q[95:64]   + f, hin_q[63:32]   + g, hin_q[31:0]    + h};
  assign dist_data  = h_sum[255 - 16*cnt[3:0] -: 16];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
      h_out <= '0;
      blk_q <= '0;
      hin_q <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          blk_q <= block;
          hin_q <= h_in;
          {a, b, c, d, e, f, g, h} <= h_in;
          // the start cycle is the first schedule cycle: word 0 is loaded now
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= block[511 -: 32];
          cnt   <= 7'd1;
          state <= S_SCHED;
        end
        S_SCHED: begin
          // load word cnt into the top of the window (window fills bottom-up)
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= blk_q[511 - 32*cnt[3:0] -: 32];
          if (cnt == 7'(SHA_SCHED_CYC - 1)) begin cnt <= '0; state <= S_COMP; end
          else cnt <= cnt + 7'd1;
        end
        S_COMP: begin
          h <= g; g <= f; f <= e; e <= d + t1;
          d <= c; c <= b; b <= a; a <= t1 + t2;
          for (int i = 0; i < 15; i++) w[i] <= w[i+1];
          w[15] <= wnew;
          if (cnt == 7'(SHA_COMP_CYC - 1)) begin cnt <= '0; state <= S_DIST; end
          else cnt <= cnt + 7'd1;
        end
        S_DIST: begin
          if (cnt == 7'd0) begin
            h_out <= h_sum;
          end
          if (cnt == 7'(SHA_DIST_CYC - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            done  <= 1'b1;
          end else cnt <= cnt + 7'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
