// tb_response_obfuscator: shifts in 256 random bits (with gaps), checks count,
// full and that further bits are ignored, then that the digest equals the
// reference SHA-256 of the collected bit string after 96 cycles.
module tb_response_obfuscator;
  import interpuf_pkg::*;
  import sha256_ref_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, bit_valid = 0, bit_in = 0, finish = 0;
  logic [8:0] count;
  logic full, busy, done;
  digest_t digest;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  response_obfuscator dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      logic [255:0] bits;
      logic [511:0] blk;
      int cyc;
      clear = 1; @(negedge clk); clear = 0;
      checks++; if (count != 0 || full) failures++;
      for (int i = 0; i < 256; i++) begin
        bits[255 - i] = 1'($urandom);
        bit_valid = 1; bit_in = bits[255 - i]; @(negedge clk);
        bit_valid = 0;
        if ($urandom % 3 == 0) @(negedge clk);
      end
      checks++; if (count != 256 || !full) begin failures++; $display("FAIL count %0d", count); end
      bit_valid = 1; bit_in = ~bits[0]; @(negedge clk); bit_valid = 0;   // ignored
      finish = 1; @(negedge clk); finish = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != 96) begin failures++; $display("FAIL latency %0d", cyc); end
      blk = {bits, 1'b1, 191'd0, 64'd256};
      checks++; if (digest != compress(IV, blk)) begin failures++; $display("FAIL digest"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
