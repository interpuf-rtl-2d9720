// tb_challenge_obfuscator: checks the keyed GF(2) challenge map against an
// independent bit-level model (permutation by index arithmetic, flips, band
// mixing) and checks invertibility by undoing the map with its inverse
// (solving the unit triangular system bit by bit) for random keys and inputs.
module tb_challenge_obfuscator;
  import interpuf_pkg::*;
  obf_key_t key;
  chal_t ch_in, ch_out;
  int checks = 0, failures = 0;

  challenge_obfuscator dut (.*);

  function automatic chal_t fwd(input obf_key_t k, input chal_t x);
    chal_t p, f, y;
    int r;
    r = int'(k.rot % CH_W);
    for (int i = 0; i < CH_W; i++) p[(i + r) % CH_W] = x[i];
    f = p ^ k.polarity;
    y[0] = f[0];
    for (int i = 1; i < CH_W; i++) y[i] = f[i] ^ (f[i-1] & k.taps[i]);
    return y;
  endfunction

  function automatic chal_t inv(input obf_key_t k, input chal_t y);
    chal_t f, p, x;
    int r;
    f[0] = y[0];
    for (int i = 1; i < CH_W; i++) f[i] = y[i] ^ (f[i-1] & k.taps[i]);
    p = f ^ k.polarity;
    r = int'(k.rot % CH_W);
    for (int i = 0; i < CH_W; i++) x[i] = p[(i + r) % CH_W];
    return x;
  endfunction

  initial begin
    for (int n = 0; n < 2000; n++) begin
      key.taps = $urandom; key.polarity = $urandom; key.rot = 32'($urandom % 32);
      ch_in = $urandom;
      #1;
      checks++;
      if (ch_out !== fwd(key, ch_in)) begin
        failures++; if (failures < 10) $display("FAIL map in=%h out=%h exp=%h", ch_in, ch_out, fwd(key, ch_in));
      end
      checks++;
      if (inv(key, ch_out) !== ch_in) begin failures++; if (failures < 10) $display("FAIL inverse"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
