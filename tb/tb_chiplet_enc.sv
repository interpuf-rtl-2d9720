// tb_chiplet_enc: checks G' = SHA256(ID || SIG || R* || EnrollTag) against the
// reference model, the 96-cycle latency, and that a single changed bit of
// the identity gives a digest about half of whose bits differ.
module tb_chiplet_enc;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  id_t id; sig_t sig; digest_t rstar, gsig; tag_t tag;
  logic busy, done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  chiplet_enc dut (.*);

  function automatic logic [511:0] ref_block(input id_t i, input sig_t s, input digest_t r, input tag_t t);
    logic [511:0] b;
    b = '0;
    b[511:128] = {i, s, r, t};
    b[127] = 1'b1;
    b[63:0] = 64'd384;
    return b;
  endfunction

  task automatic hash(output digest_t g, output int cyc);
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    g = gsig;
  endtask

  initial begin
    int hd_total = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++) begin
      digest_t g0, g1;
      int cyc;
      id = $urandom; sig = {$urandom, $urandom}; tag = $urandom;
      for (int i = 0; i < 8; i++) rstar[32*i +: 32] = $urandom;
      hash(g0, cyc);
      checks++; if (cyc != 96) begin failures++; $display("FAIL latency %0d", cyc); end
      checks++; if (g0 != compress(IV, ref_block(id, sig, rstar, tag))) begin failures++; $display("FAIL digest"); end
      begin int bp; bp = int'($urandom % 32); id[bp] = ~id[bp]; end
      hash(g1, cyc);
      hd_total += $countones(g0 ^ g1);
    end
    checks++;
    if (hd_total < 16 * 100 || hd_total > 16 * 156) begin failures++; $display("FAIL avalanche %0d", hd_total); end
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
