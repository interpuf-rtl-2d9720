// tb_session_binder: checks s = SHA256(R* || ch || Epoch) against the
// reference model for random fields, the 96-cycle latency, and that
// session_ok follows puf_ok sampled at start.
module tb_session_binder;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, puf_ok = 0;
  digest_t rstar, salt;
  chal_t ch; epoch_t epoch;
  logic busy, done, session_ok;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  session_binder dut (.*);

  function automatic logic [511:0] ref_block(input digest_t r, input chal_t c, input epoch_t e);
    logic [511:0] b;
    b = '0;
    b[511:192] = {r, c, e};        // 320 message bits
    b[191] = 1'b1;                 // padding one
    b[63:0] = 64'd320;             // length
    return b;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      int cyc;
      for (int i = 0; i < 8; i++) rstar[32*i +: 32] = $urandom;
      ch = $urandom; epoch = $urandom; puf_ok = n[0];
      start = 1; @(negedge clk); start = 0;
      rstar = '0; ch = '0; puf_ok = ~puf_ok;   // must have been latched
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != 96) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++; if (session_ok != n[0]) begin failures++; $display("FAIL session_ok"); end
      @(negedge clk);
    end
    // value check with held inputs
    for (int n = 0; n < 10; n++) begin
      for (int i = 0; i < 8; i++) rstar[32*i +: 32] = $urandom;
      ch = $urandom; epoch = $urandom;
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (salt != compress(IV, ref_block(rstar, ch, epoch))) begin failures++; $display("FAIL salt"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
