// aster_top: the ASTER chip, a chain of NUM_TILES tiles.
//
// The host sends command packets (aster_pkg::pkt_t) into host_in; each
// packet travels down the chain of tile routers until it reaches the tile
// named by its dest field. Every tile answers every command with a response
// packet addressed to the host, which continues down the chain and leaves on
// host_out. Both ports use valid/ready. The chip-of-tiles organisation is
// the design's; the tile count and the chain topology are this
// implementation's choices.
module aster_top
  import aster_pkg::*;
#(
  parameter int NUM_TILES = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic host_in_valid,
  output logic host_in_ready,
  input  pkt_t host_in_pkt,
  output logic host_out_valid,
  input  logic host_out_ready,
  output pkt_t host_out_pkt
);
  logic [NUM_TILES:0] v, r;
  pkt_t p [NUM_TILES+1];

  assign v[0]          = host_in_valid;
  assign host_in_ready = r[0];
  assign p[0]          = host_in_pkt;

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    tile #(.ID(TILE_ID_W'(t))) u_tile (
      .clk(clk), .rst_n(rst_n),
      .up_valid(v[t]), .up_ready(r[t]), .up_pkt(p[t]),
      .dn_valid(v[t+1]), .dn_ready(r[t+1]), .dn_pkt(p[t+1])
    );
  end

  assign host_out_valid   = v[NUM_TILES];
  assign r[NUM_TILES]     = host_out_ready;
  assign host_out_pkt     = p[NUM_TILES];

  if (NUM_TILES >= 2**TILE_ID_W - 1) begin : g_size_err
    $error("aster_top: NUM_TILES must leave the host id free");
  end
endmodule
