// tb_interposer_mesh: programs routes through the 4 x 4 mesh and checks that
// data injected at a source tile's local port reaches the sink tile's local
// port after exactly one cycle per hop, and that no other local port sees it.
// Route 1: tile 0 east along row 0 to tile 3, then south to tile 15 (7 hops
// between the tiles, 8 registered outputs). Route 2: tile 12 north to tile 0.
module tb_interposer_mesh;
  import interpuf_pkg::*;
  localparam int M = 4, W = 8, T = M * M;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [3:0] cfg_tile = '0;
  logic [14:0] cfg_sel = '0;
  logic [W-1:0] local_in [T];
  logic [W-1:0] local_out [T];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  interposer_mesh #(.MESH(M), .LINK_W(W)) dut (.*);

  function automatic logic [14:0] word(input dir_e n, input dir_e e, input dir_e s,
                                       input dir_e w, input dir_e l);
    return {l, w, s, e, n};
  endfunction

  task automatic cfg(input int t, input logic [14:0] v);
    @(negedge clk); cfg_tile = 4'(t); cfg_sel = v; cfg_we = 1;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic send(input int src, input int dst, input int hops);
    logic [W-1:0] v;
    int seen;
    v = W'($urandom_range(1, 255));
    @(negedge clk);
    local_in[src] = v;
    @(negedge clk);
    local_in[src] = '0;
    seen = -1;
    for (int c = 1; c <= hops + 4; c++) begin
      for (int t = 0; t < T; t++)
        if (t != dst && local_out[t] != 0) begin
          checks++; failures++; $display("FAIL stray data at tile %0d", t);
        end
      if (local_out[dst] == v && seen < 0) seen = c;
      @(negedge clk);
    end
    checks++;
    if (seen != hops) begin failures++; $display("FAIL %0d->%0d arrived after %0d, expected %0d", src, dst, seen, hops); end
  endtask

  initial begin
    for (int t = 0; t < T; t++) local_in[t] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // route 1: 0 -> 1 -> 2 -> 3 (east), 3 -> 7 -> 11 -> 15 (south), local out at 15
    cfg(0,  word(DIR_OFF, DIR_LOCAL, DIR_OFF, DIR_OFF, DIR_OFF));
    cfg(1,  word(DIR_OFF, DIR_WEST,  DIR_OFF, DIR_OFF, DIR_OFF));
    cfg(2,  word(DIR_OFF, DIR_WEST,  DIR_OFF, DIR_OFF, DIR_OFF));
    cfg(3,  word(DIR_OFF, DIR_OFF,   DIR_WEST, DIR_OFF, DIR_OFF));
    cfg(7,  word(DIR_OFF, DIR_OFF,   DIR_NORTH, DIR_OFF, DIR_OFF));
    cfg(11, word(DIR_OFF, DIR_OFF,   DIR_NORTH, DIR_OFF, DIR_OFF));
    cfg(15, word(DIR_OFF, DIR_OFF,   DIR_OFF, DIR_OFF, DIR_NORTH));
    repeat (5) send(0, 15, 7);
    // reconfigure: tile 12 north to tile 0 (12 -> 8 -> 4 -> 0)
    for (int t = 0; t < T; t++) cfg(t, {5{DIR_OFF}});
    cfg(12, word(DIR_LOCAL, DIR_OFF, DIR_OFF, DIR_OFF, DIR_OFF));
    cfg(8,  word(DIR_SOUTH, DIR_OFF, DIR_OFF, DIR_OFF, DIR_OFF));
    cfg(4,  word(DIR_SOUTH, DIR_OFF, DIR_OFF, DIR_OFF, DIR_OFF));
    cfg(0,  word(DIR_OFF, DIR_OFF, DIR_OFF, DIR_OFF, DIR_SOUTH));
    repeat (5) send(12, 0, 4);
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
