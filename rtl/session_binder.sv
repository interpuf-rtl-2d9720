// session_binder: derives the per-session salt that binds every proof to this
// interposer and to the current authentication run (ch, Epoch).
//
//   s = SHA256(R* || ch || Epoch)        (one padded 512-bit block, 96 cycles)
//
// start (while idle) latches R*, the routing challenge and the epoch; done
// pulses with salt valid, and salt holds until the next start. session_ok is
// high from done on, once a salt has been derived while puf_ok was 1, i.e. the session may
// proceed only when the current challenge passed the PUF stability check.
// The paper names an HMAC-based KDF; a single SHA-256 over the same fields is
// this design's simplification (no HMAC key schedule).
//
// Lint note: the hash core's 16-bit digest stream is not used (the full
// salt is read at done) and is reported unused.
module session_binder
  import interpuf_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  digest_t rstar,
  input  chal_t   ch,
  input  epoch_t  epoch,
  input  logic    puf_ok,
  output logic    busy,
  output logic    done,
  output digest_t salt,
  output logic    session_ok
);
  logic sha_busy, sha_done, dist_valid, ok_q, valid_q;
  logic [15:0] dist_data;

  sha256_core u_sha (
    .clk, .rst_n, .start(start && !sha_busy), .block(s_block(rstar, ch, epoch)),
    .h_in(SHA256_IV), .busy(sha_busy), .done(sha_done), .h_out(salt),
    .dist_valid, .dist_data);

  assign busy = sha_busy;
  assign done = sha_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ok_q <= 1'b0; valid_q <= 1'b0;
    end else begin
      if (start && !sha_busy) begin ok_q <= puf_ok; valid_q <= 1'b0; end
      if (sha_done) valid_q <= 1'b1;
    end
  end
  assign session_ok = ok_q && (sha_done || valid_q);

endmodule
