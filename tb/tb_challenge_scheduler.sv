// tb_challenge_scheduler: checks the one-cycle scheduling latency, digest-mode
// configurations (both routes equal to the obfuscated per-candidate challenge,
// computed here from the obfuscator formula) and self-check-mode
// configurations (A all crossed, B with its first z stages straight).
module tb_challenge_scheduler;
  import interpuf_pkg::*;
  logic clk = 0, rst_n = 0, req = 0, zmode = 0;
  logic [6:0] pair = '0;
  logic [2:0] perm = '0;
  logic [5:0] z = '0;
  chal_t ch = '0;
  obf_key_t key;
  logic cfg_valid;
  logic [6:0] pair_q;
  stage_cfg_t cfg_a, cfg_b;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  challenge_scheduler dut (.*);

  function automatic chal_t obf(input obf_key_t k, input chal_t x);
    chal_t p, f, y;
    int r;
    r = int'(k.rot % CH_W);
    for (int i = 0; i < CH_W; i++) p[(i + r) % CH_W] = x[i];
    f = p ^ k.polarity;
    y[0] = f[0];
    for (int i = 1; i < CH_W; i++) y[i] = f[i] ^ (f[i-1] & k.taps[i]);
    return y;
  endfunction

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    key = '{taps: 32'h1234_5679, polarity: 32'h0F0F_3355, rot: 32'd7};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      chal_t expc;
      stage_cfg_t expb;
      zmode = n[0];
      pair = 7'($urandom % NUM_PAIRS); perm = 3'($urandom); z = 6'($urandom % 33);
      ch = $urandom;
      req = 1;
      @(negedge clk);
      req = 0;
      chk(cfg_valid, "valid one cycle after req");
      chk(pair_q == pair, "pair");
      if (zmode) begin
        expb = '1;
        for (int i = 0; i < int'(z); i++) expb[i] = 1'b0;
        chk(cfg_a == '1, "A all crossed");
        chk(cfg_b == expb, $sformatf("B z=%0d got %h", z, cfg_b));
        chk($countones(cfg_b) == 32 - int'(z), "B straight count");
      end else begin
        expc = obf(key, ch ^ chal_t'((32'(pair) * 8 + 32'(perm)) * 32'h9E3779B9));
        chk(cfg_a == expc && cfg_b == expc, "digest config");
      end
      @(negedge clk);
      chk(!cfg_valid, "valid is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
