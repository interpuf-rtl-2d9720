// tb_sha256_core: self-checking test of the 96-cycle SHA-256 compression core.
// Checks the FIPS 180-4 "abc" and two-block "abcdbcdecdef..." vectors, 20
// random blocks against an independent reference model, the 96-cycle latency,
// the chaining input and the 16 x 16-bit distribution stream.
module tb_sha256_core;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  block_t blk;
  logic [255:0] h_in, h_out;
  logic busy, done, dist_valid;
  logic [15:0] dist_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sha256_core dut (.clk, .rst_n, .start, .block(blk), .h_in, .busy, .done, .h_out,
                   .dist_valid, .dist_data);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [255:0] streamed;
  int           nstream;
  always @(posedge clk) if (dist_valid) begin
    streamed = {streamed[239:0], dist_data};
    nstream++;
  end

  task automatic run(input logic [255:0] hi, input block_t b, output logic [255:0] ho);
    int cyc;
    @(negedge clk);
    blk = b; h_in = hi; start = 1;
    @(negedge clk);
    start = 0; blk = '0; h_in = '0;  // inputs must be captured at start
    nstream = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 96, $sformatf("latency %0d cycles, expected 96", cyc));
    check(nstream == 16, $sformatf("distribution beats %0d", nstream));
    check(streamed == h_out, "distribution stream equals digest");
    ho = h_out;
  endtask

  initial begin
    logic [255:0] r, r1;
    block_t b, b2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // "abc"
    b = '0; b[511 -: 24] = 24'h616263; b[487] = 1'b1; b[63:0] = 64'd24;
    run(IV, b, r);
    check(r == 256'hba7816bf8f01cfea414140de5dae2223b00361a396177a9cb410ff61f20015ad, "abc vector");
    // 448-bit two-block vector
    b  = {"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 1'b1, 63'd0};
    b2 = '0; b2[63:0] = 64'd448;
    run(IV, b, r1);
    run(r1, b2, r);
    check(r == 256'h248d6a61d20638b8e5c026930c3e6039a33ce45964ff2167f6ecedd419db06c1, "two-block vector");
    for (int n = 0; n < 20; n++) begin
      logic [255:0] hi;
      for (int i = 0; i < 16; i++) b[32*i +: 32] = $urandom;
      for (int i = 0; i < 8; i++)  hi[32*i +: 32] = $urandom;
      run(hi, b, r);
      check(r == compress(hi, b), $sformatf("random block %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
