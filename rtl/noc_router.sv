// noc_router: network-on-chip router of one tile.
//
// Tiles are chained: packets enter from the upstream neighbour (or the host
// at the head of the chain) and leave towards the downstream neighbour (or
// the host at the tail). A packet whose dest equals ID is delivered to the
// local tile; every other packet, and every response the local tile emits,
// goes downstream. Both outputs are registered (one packet each) and all
// ports use valid/ready: a packet moves when valid and ready are both high.
// When an upstream packet and a local response want the downstream register
// in the same cycle they take turns. The chain topology and the handshake are
// this implementation's choices.
module noc_router
  import aster_pkg::*;
#(
  parameter logic [TILE_ID_W-1:0] ID = '0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic up_valid,
  output logic up_ready,
  input  pkt_t up_pkt,
  input  logic li_valid,    // local response from the tile
  output logic li_ready,
  input  pkt_t li_pkt,
  output logic lo_valid,    // command to the tile
  input  logic lo_ready,
  output pkt_t lo_pkt,
  output logic dn_valid,
  input  logic dn_ready,
  output pkt_t dn_pkt
);
  logic dn_free, lo_free, up_local, up_wants_dn, prio_up;
  logic up_go, li_go;

  assign dn_free     = !dn_valid || dn_ready;
  assign lo_free     = !lo_valid || lo_ready;
  assign up_local    = (up_pkt.dest == ID);
  assign up_wants_dn = up_valid && !up_local;

  always_comb begin
    up_go = 1'b0;
    li_go = 1'b0;
    if (up_valid && up_local) up_go = lo_free;
    if (dn_free) begin
      if (up_wants_dn && li_valid) begin
        if (prio_up) up_go = 1'b1;
        else         li_go = 1'b1;
      end else if (up_wants_dn) up_go = 1'b1;
      else if (li_valid)        li_go = 1'b1;
    end
  end

  assign up_ready = up_go;
  assign li_ready = li_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dn_valid <= 1'b0;
      lo_valid <= 1'b0;
      dn_pkt   <= '0;
      lo_pkt   <= '0;
      prio_up  <= 1'b1;
    end else begin
      if (dn_ready) dn_valid <= 1'b0;
      if (lo_ready) lo_valid <= 1'b0;
      if (up_go && up_local) begin
        lo_valid <= 1'b1;
        lo_pkt   <= up_pkt;
      end
      if (up_go && !up_local) begin
        dn_valid <= 1'b1;
        dn_pkt   <= up_pkt;
      end else if (li_go) begin
        dn_valid <= 1'b1;
        dn_pkt   <= li_pkt;
      end
      if (up_wants_dn && li_valid && dn_free) prio_up <= !prio_up;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) dn_valid && !dn_ready |=> dn_valid && $stable(dn_pkt));
endmodule
