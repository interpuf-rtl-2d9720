// tb_diff_arbiter_model: races with a margin larger than the noise must always
// resolve to the earlier route; exact ties must resolve both ways over many
// samples (noise present); resp_valid follows sample by one cycle.
module tb_diff_arbiter_model;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [15:0] delay_a = 0, delay_b = 0;
  logic resp_valid, resp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  diff_arbiter_model #(.NOISE(3)) dut (.*);

  initial begin
    int ones = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int d;
      delay_a = 16'(1000 + $urandom % 500);
      d = 4 + int'($urandom % 40);
      delay_b = (n % 2) ? delay_a - 16'(d) : delay_a + 16'(d);
      sample = 1; @(negedge clk); sample = 0;
      checks++; if (!resp_valid) begin failures++; $display("FAIL valid"); end
      checks++; if (resp != n[0]) begin failures++; $display("FAIL resp a=%0d b=%0d", delay_a, delay_b); end
      @(negedge clk);
      checks++; if (resp_valid) failures++;
    end
    for (int n = 0; n < 200; n++) begin
      delay_a = 1000; delay_b = 1000;
      sample = 1; @(negedge clk); sample = 0;
      ones += resp;
      @(negedge clk);
    end
    checks++; if (ones < 20 || ones > 180) begin failures++; $display("FAIL tie ones=%0d", ones); end
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
