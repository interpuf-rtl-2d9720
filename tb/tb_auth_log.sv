// tb_auth_log: writes 20 random entries into the 8-deep audit ring and checks
// after each write that reads 0..count-1 return the newest entries in order
// and that count saturates at the depth.
module tb_auth_log;
  import interpuf_pkg::*;
  logic clk = 0, rst_n = 0, wr = 0;
  logic [1:0] wr_chip, rd_chip;
  chal_t wr_ch, rd_ch; epoch_t wr_epoch, rd_epoch; nonce_t wr_nonce, rd_nonce;
  digest_t wr_token, rd_token;
  logic [2:0] rd_idx = '0;
  logic [3:0] count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  auth_log #(.DEPTH(8), .CHIP_W(2)) dut (.*);

  typedef struct { logic [1:0] c; chal_t ch; epoch_t e; nonce_t n; digest_t t; } ent_t;
  ent_t hist [$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (count != 0) failures++;
    for (int n = 0; n < 20; n++) begin
      ent_t e;
      e.c = 2'($urandom); e.ch = $urandom; e.e = $urandom; e.n = {$urandom, $urandom};
      for (int i = 0; i < 8; i++) e.t[32*i +: 32] = $urandom;
      wr_chip = e.c; wr_ch = e.ch; wr_epoch = e.e; wr_nonce = e.n; wr_token = e.t;
      wr = 1; @(negedge clk); wr = 0;
      hist.push_front(e);
      checks++; if (int'(count) != ((n + 1 < 8) ? n + 1 : 8)) begin failures++; $display("FAIL count %0d n=%0d t=%0t dut=%0d wp=%0d", count, n, $time, dut.count, dut.wp); end
      for (int k = 0; k < int'(count); k++) begin
        rd_idx = 3'(k); @(negedge clk);
        checks++;
        if (rd_chip != hist[k].c || rd_ch != hist[k].ch || rd_epoch != hist[k].e ||
            rd_nonce != hist[k].n || rd_token != hist[k].t) begin
          failures++; $display("FAIL entry %0d after %0d writes", k, n + 1);
        end
      end
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
