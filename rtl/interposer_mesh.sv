// interposer_mesh: MESH x MESH grid of router tiles joined by bidirectional
// neighbour links, the plug-and-play base of the reconfigurable interposer.
//
// Tile (x, y) has index y*MESH + x; y grows to the south, x to the east. Each
// link is a pair of opposite one-way buses: a tile's east output drives its
// east neighbour's west input and so on. Inputs at the mesh border are tied to
// zero. Chiplets attach at the local ports (local_in / local_out, one per
// tile). A tile's switchbox is programmed by cfg_we with cfg_tile selecting
// the tile and cfg_sel its 15-bit word (see router_tile). Every hop costs one
// cycle. A 4 x 4 grid is the default size the paper uses for its simulations;
// the link width is this design's choice.
//
// Lint note: each tile's configuration read-back (cfg_q) is not brought out
// of the mesh and is reported unused.
module interposer_mesh
  import interpuf_pkg::*;
#(
  parameter int unsigned MESH   = 4,
  parameter int unsigned LINK_W = 8,
  localparam int unsigned TILES = MESH * MESH,
  localparam int unsigned TW    = (TILES > 1) ? $clog2(TILES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [TW-1:0]     cfg_tile,
  input  logic [14:0]       cfg_sel,
  input  logic [LINK_W-1:0] local_in  [TILES],
  output logic [LINK_W-1:0] local_out [TILES]
);

  logic [LINK_W-1:0] tin  [TILES][5];
  logic [LINK_W-1:0] tout [TILES][5];

  for (genvar y = 0; y < MESH; y++) begin : g_row
    for (genvar x = 0; x < MESH; x++) begin : g_col
      localparam int unsigned T = y * MESH + x;
      logic [14:0] cfg_q;
      // neighbour wiring
      localparam int unsigned TN = (y > 0)        ? T - MESH : T;
      localparam int unsigned TE = (x < MESH - 1) ? T + 1    : T;
      localparam int unsigned TS = (y < MESH - 1) ? T + MESH : T;
      localparam int unsigned TWW = (x > 0)       ? T - 1    : T;
      assign tin[T][DIR_NORTH] = (y > 0)        ? tout[TN][DIR_SOUTH] : '0;
      assign tin[T][DIR_EAST]  = (x < MESH - 1) ? tout[TE][DIR_WEST]  : '0;
      assign tin[T][DIR_SOUTH] = (y < MESH - 1) ? tout[TS][DIR_NORTH] : '0;
      assign tin[T][DIR_WEST]  = (x > 0)        ? tout[TWW][DIR_EAST] : '0;
      assign tin[T][DIR_LOCAL] = local_in[T];
      assign local_out[T]      = tout[T][DIR_LOCAL];

      router_tile #(.LINK_W(LINK_W)) u_tile (
        .clk, .rst_n,
        .cfg_we  (cfg_we && (cfg_tile == TW'(T))),
        .cfg_sel,
        .in_port (tin[T]),
        .out_port(tout[T]),
        .cfg_q
      );
    end
  end

endmodule
