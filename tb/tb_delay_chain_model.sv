// tb_delay_chain_model: checks the route delay model against its definition:
// every stage contributes its base delay (crossed slower than straight) plus
// a device variation in 0..VAR_RANGE-1, the extra delay input adds directly,
// flipping one stage from crossed to straight lowers the delay, and two
// devices (seeds) differ.
module tb_delay_chain_model;
  import interpuf_pkg::*;
  logic [6:0] pair;
  stage_cfg_t cfg;
  logic [15:0] extra_dly, d0, d1;
  int checks = 0, failures = 0;

  delay_chain_model #(.DEVICE_SEED(32'h1111), .ROUTE(0)) dut0 (.pair, .cfg, .extra_dly, .delay(d0));
  delay_chain_model #(.DEVICE_SEED(32'h2222), .ROUTE(0)) dut1 (.pair, .cfg, .extra_dly, .delay(d1));

  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    int differ = 0;
    for (int n = 0; n < 500; n++) begin
      int nc, lo, hi;
      logic [15:0] base, more, flipped;
      pair = 7'($urandom % NUM_PAIRS); cfg = $urandom; extra_dly = 0;
      #1;
      nc = $countones(cfg);
      lo = nc * 120 + (32 - nc) * 100;
      hi = lo + 32 * 15;
      chk(int'(d0) >= lo && int'(d0) <= hi, $sformatf("range %0d in [%0d,%0d]", d0, lo, hi));
      base = d0;
      if (d0 != d1) differ++;
      extra_dly = 16'($urandom % 200);
      #1;
      chk(d0 == base + extra_dly, "extra delay adds");
      more = d0;
      if (cfg != 0) begin
        int s;
        do s = int'($urandom % 32); while (!cfg[s]);
        extra_dly = 0; cfg[s] = 1'b0;
        #1;
        flipped = d0;
        chk(int'(flipped) < int'(base) && int'(base) - int'(flipped) >= 20 - 15 && int'(base) - int'(flipped) <= 20 + 15,
            "straight stage faster");
      end
      if (more == 0) failures++;
    end
    chk(differ > 400, "devices differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
