// tb_majority_voter: feeds random 16-outcome sequences with a chosen number of
// ones and checks done after exactly K inputs, the majority value, and the
// stability flag (at most 2 flips, ties never stable).
module tb_majority_voter;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_bit = 0;
  logic done, maj_bit, stable;
  logic [4:0] ones_q, flips;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  majority_voter #(.K(16), .MAX_FLIPS(2)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int ones, got_done, pos;
      logic [15:0] seq;
      ones = (n < 17) ? n : int'($urandom % 17);
      seq = '0;
      for (int i = 0; i < ones; i++) begin
        do pos = int'($urandom % 16); while (seq[pos]);
        seq[pos] = 1'b1;
      end
      clear = 1; @(negedge clk); clear = 0;
      got_done = 0;
      for (int i = 0; i < 16; i++) begin
        in_valid = 1; in_bit = seq[i];
        @(negedge clk);
        if (done) got_done = i + 1;
        if ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); if (done) got_done = i + 1; end
      end
      in_valid = 0;
      checks++; if (got_done != 16) begin failures++; $display("FAIL done at %0d", got_done); end
      checks++; if (maj_bit != (ones > 8)) begin failures++; $display("FAIL maj ones=%0d", ones); end
      checks++;
      if (stable != (ones <= 2 || ones >= 14)) begin failures++; $display("FAIL stable ones=%0d got %0b", ones, stable); end
      checks++; if (int'(flips) != ((ones < 16 - ones) ? ones : 16 - ones)) begin failures++; $display("FAIL flips"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
