// chiplet_enc: the small hashing engine each chiplet carries ("chiplet
// encryption"). It binds the chiplet's identity to the interposer's route
// digest:
//
//   G'_i = SHA256(ID_i || SIG_i || R* || EnrollTag)   (384 bits, one block)
//
// At enrollment its output is the one-time commitment G_i handed to the
// interposer; in the field it recomputes the same value as the hashed
// signature that the interposer checks. ID_i and SIG_i stay inside the
// chiplet: only the digest leaves. start (while idle) latches the fields;
// done pulses after 96 cycles (16 schedule, 64 rounds, 16 distribution) with
// gsig valid. The hash and cycle budget follow the paper; the field widths
// are this design's.
//
// Lint note: the hash core's 16-bit digest stream is not used (the full
// digest is read at done) and is reported unused.
module chiplet_enc
  import interpuf_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  id_t     id,
  input  sig_t    sig,
  input  digest_t rstar,
  input  tag_t    tag,
  output logic    busy,
  output logic    done,
  output digest_t gsig
);
  logic dist_valid;
  logic [15:0] dist_data;

  sha256_core u_sha (
    .clk, .rst_n, .start(start && !busy), .block(g_block(id, sig, rstar, tag)),
    .h_in(SHA256_IV), .busy, .done, .h_out(gsig), .dist_valid, .dist_data);

endmodule
