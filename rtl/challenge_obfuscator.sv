// challenge_obfuscator: keyed, invertible linear map over GF(2) applied to
// every challenge before it reaches the delay stages.
//
// Three stages, in the order the paper's interconnect wrapper describes:
//  (i)   permutation of stage indices: rotate left by key.rot;
//  (ii)  sparse polarity flips: XOR with key.polarity;
//  (iii) sparse mixing: y[i] = x[i] ^ (x[i-1] & key.taps[i]) for i >= 1,
//        y[0] = x[0]; the matrix is unit lower triangular, hence invertible.
// The map is affine and a bijection for every key, so no entropy is added or
// lost. Purely combinational. The choice of rotation as the permutation and
// of a one-neighbour mixing band is this design's own.
module challenge_obfuscator
  import interpuf_pkg::*;
(
  input  obf_key_t    key,
  input  chal_t       ch_in,
  output chal_t       ch_out
);
  localparam int unsigned RW = $clog2(CH_W);

  chal_t perm, flip;
  logic [RW-1:0] r;
  always_comb begin
    r    = key.rot[RW-1:0];
    perm = (r == '0) ? ch_in : chal_t'((ch_in << r) | (ch_in >> (CH_W - 32'(r))));
    flip = perm ^ key.polarity;
    ch_out = flip ^ ((flip << 1) & key.taps);
  end

endmodule
