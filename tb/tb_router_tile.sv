// tb_router_tile: checks the switchbox of one router tile. For random
// configuration words and random inputs, each output must equal the input its
// 3-bit field selects (zero for a switched-off output) one cycle later.
module tb_router_tile;
  import interpuf_pkg::*;
  localparam int W = 8;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [14:0] cfg_sel = '0, cfg_q;
  logic [W-1:0] in_port [5];
  logic [W-1:0] out_port [5];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  router_tile #(.LINK_W(W)) dut (.*);

  initial begin
    for (int i = 0; i < 5; i++) in_port[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int o = 0; o < 5; o++) begin
      checks++; if (out_port[o] != 0) begin failures++; $display("FAIL reset out %0d", o); end
    end
    for (int n = 0; n < 200; n++) begin
      logic [2:0] sel [5];
      logic [W-1:0] exp_v;
      for (int o = 0; o < 5; o++) begin
        sel[o] = ($urandom % 6 == 5) ? 3'd7 : 3'($urandom % 5);
        cfg_sel[3*o +: 3] = sel[o];
      end
      cfg_we = 1;
      @(negedge clk);
      cfg_we = 0;
      for (int i = 0; i < 5; i++) in_port[i] = W'($urandom);
      @(negedge clk);
      for (int o = 0; o < 5; o++) begin
        exp_v = (sel[o] == 3'd7) ? '0 : in_port[sel[o]];
        checks++;
        if (out_port[o] !== exp_v) begin
          failures++; $display("FAIL n=%0d out %0d sel %0d got %h exp %h", n, o, sel[o], out_port[o], exp_v);
        end
      end
      checks++; if (cfg_q != cfg_sel) failures++;
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
