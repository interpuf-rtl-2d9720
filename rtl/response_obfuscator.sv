// response_obfuscator: gathers the stabilized PUF bits and hashes them, so
// that only a SHA-256 digest ever leaves the interposer.
//
// clear empties the collector. Each bit_valid pulse appends bit_in; the first
// bit lands in the most significant position of the 256-bit string. count
// says how many are held and full is high at 256. finish (while full and
// idle) hashes the string as one padded SHA-256 block in 96 cycles:
//   R* = SHA256(stable_PUF_bits)
// done pulses with digest valid; digest holds until the next finish. The raw
// bit string has no output port. The hashing follows the paper; collecting
// exactly 256 bits (the paper's digest length) is this design's choice.
//
// Lint note: the hash core's 16-bit digest stream is not used (the full
// digest is read at done) and is reported unused.
module response_obfuscator
  import interpuf_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    bit_valid,
  input  logic    bit_in,
  input  logic    finish,
  output logic [8:0] count,
  output logic    full,
  output logic    busy,
  output logic    done,
  output digest_t digest
);
  digest_t bits;
  logic    sha_busy, sha_done, dist_valid;
  logic [15:0] dist_data;

  assign full = (count == 9'(DIGEST_W));
  assign busy = sha_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits  <= '0;
      count <= '0;
    end else if (clear) begin
      bits  <= '0;
      count <= '0;
    end else if (bit_valid && !full) begin
      bits[~count[7:0]] <= bit_in;   // index 255 - count
      count <= count + 9'd1;
    end
  end

  sha256_core u_sha (
    .clk, .rst_n,
    .start (finish && full && !sha_busy),
    .block (r_block(bits)),
    .h_in  (SHA256_IV),
    .busy  (sha_busy),
    .done  (sha_done),
    .h_out (digest),
    .dist_valid, .dist_data
  );
  assign done = sha_done;

endmodule
