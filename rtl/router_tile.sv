// router_tile: one tile of the interposer's Manhattan routing mesh.
//
// The tile has four neighbour links (north, east, south, west) and one local
// port to the chiplet bump field above it. Its switchbox decides the direction
// of signal flow: each of the five outputs selects one of the five inputs (or
// is switched off, driving zero) from a 15-bit configuration word, three bits
// per output in the order N, E, S, W, Local (encoding: dir_e). The
// configuration is written through cfg_we/cfg_sel and kept in the tile, which
// is what makes the interposer reconfigurable.
// Timing: outputs are registered, one cycle per hop. A purely wired switchbox
// could form combinational loops when the mesh is configured in a ring; the
// register per hop is this design's choice. The tile/switchbox structure
// follows the paper; widths, encoding and the register are assumptions.
module router_tile
  import interpuf_pkg::*;
#(
  parameter int unsigned LINK_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [14:0]       cfg_sel,
  input  logic [LINK_W-1:0] in_port  [5],   // indexed by dir_e (N,E,S,W,L)
  output logic [LINK_W-1:0] out_port [5],
  output logic [14:0]       cfg_q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cfg_q <= {5{DIR_OFF}};
    else if (cfg_we) cfg_q <= cfg_sel;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 5; o++) out_port[o] <= '0;
    end else begin
      for (int o = 0; o < 5; o++) begin
        logic [2:0] s;
        s = cfg_q[3*o +: 3];
        out_port[o] <= (s <= 3'd4) ? in_port[s] : '0;
      end
    end
  end

endmodule
