// tb_zstar_monitor: enrolls a clustered Z* vector, checks the stored values
// and their sum, then replays field values: unchanged values raise no flag,
// a shift of more than BAND raises the drift flag of that pair only, and a
// value far from the enrolled mean raises the outlier flag.
module tb_zstar_monitor;
  import interpuf_pkg::*;
  logic clk = 0, rst_n = 0, enroll = 0, clear_flags = 0, z_valid = 0;
  logic [6:0] z_pair = '0, rd_pair = '0;
  logic [5:0] z_val = '0, rd_zref;
  logic [NUM_PAIRS-1:0] drift_flags, outlier_flags;
  logic tamper_any;
  logic [12:0] zsum;
  int checks = 0, failures = 0;
  int zr [NUM_PAIRS];
  always #5 clk = ~clk;
  zstar_monitor #(.BAND(2), .AVG_BAND(4)) dut (.*);

  task automatic put(input int p, input int v);
    z_pair = 7'(p); z_val = 6'(v); z_valid = 1; @(negedge clk); z_valid = 0;
  endtask
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    int sum = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    enroll = 1; clear_flags = 1; @(negedge clk); clear_flags = 0;
    for (int p = 0; p < NUM_PAIRS; p++) begin zr[p] = 3 + int'($urandom % 3); sum += zr[p]; put(p, zr[p]); end
    chk(int'(zsum) == sum, "population sum");
    for (int p = 0; p < NUM_PAIRS; p++) begin rd_pair = 7'(p); #1; chk(int'(rd_zref) == zr[p], "stored Z*"); end
    chk(!tamper_any, "no flags during enrollment");
    enroll = 0;
    for (int p = 0; p < NUM_PAIRS; p++) put(p, zr[p]);
    chk(!tamper_any, "honest re-check clean");
    put(10, zr[10] + 3);
    chk(drift_flags[10] && $countones(drift_flags) == 1, "drift on pair 10 only");
    begin int dv; dv = (zr[10] + 3) * NUM_PAIRS - sum; if (dv < 0) dv = -dv;
      chk(outlier_flags[10] == (dv > 4 * NUM_PAIRS), "outlier test against the enrolled mean"); end
    put(20, zr[20] + 2);
    chk(!drift_flags[20], "shift of BAND tolerated");
    put(30, 20);
    chk(drift_flags[30] && outlier_flags[30], "large shift: drift and outlier");
    clear_flags = 1; @(negedge clk); clear_flags = 0;
    chk(!tamper_any, "flags cleared");
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
