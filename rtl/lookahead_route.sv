// lookahead_route: lookahead routing for one destination of a NoC packet.
//
// Given the position of the current router and the destination of a packet,
// it returns the output port the packet takes here (dimension-ordered XY
// routing) and, one hop ahead, the output port it will take at the next
// router. The router sends the second value with the header flit, so the
// next router can request its output ports as soon as the flit arrives,
// without routing it first: this is what keeps the router-to-router latency
// at one cycle. The multicast router replicates this unit once per
// destination entry of the header, so every destination is routed in
// parallel, as the design calls for. A destination whose port here is LOCAL
// has no next hop and yields an empty next-hop mask.
//
// Purely combinational.
module lookahead_route
  import noc_pkg::*;
(
  input  coord_t     cur_x,
  input  coord_t     cur_y,
  input  coord_t     dst_x,
  input  coord_t     dst_y,
  output port_e      port_here,
  output port_mask_t next_mask
);

  coord_t nx, ny;

  always_comb begin
    port_here = xy_route(cur_x, cur_y, dst_x, dst_y);
    nx = cur_x;
    ny = cur_y;
    unique case (port_here)
      P_NORTH: ny = cur_y - 1'b1;
      P_SOUTH: ny = cur_y + 1'b1;
      P_WEST:  nx = cur_x - 1'b1;
      P_EAST:  nx = cur_x + 1'b1;
      default: ;
    endcase
    if (port_here == P_LOCAL) next_mask = '0;
    else                      next_mask = port_onehot(xy_route(nx, ny, dst_x, dst_y));
  end

endmodule
