// noc_pkg: types, constants and routing functions shared by the multicast NoC
// and the accelerator socket.
//
// A flit is FLIT_W = DATA_W + 2 bits: the two top bits are the preamble
// (head, tail) and the low DATA_W bits are payload. The header flit holds,
// from bit 0 upward, a 24-bit fixed part (source x/y, message type, a
// reserved byte that carries the DMA word size, and a 5-bit destination
// count) followed by a list of 7-bit destination entries {valid, y, x}.
// With the 2 preamble bits the fixed part is 26 bits, so a flit holds
// (FLIT_W - 26) / 7 destinations: 5 for a 64-bit NoC and 14 for a 128-bit
// NoC, the capacities the design is meant to have; a 256-bit NoC would hold
// 33 and is capped at 16. The exact field order and the valid bit per entry
// are this design's choice.
//
// Routing is dimension-ordered (X first, then Y). Row 0 is the top row of
// the mesh; NORTH decreases y, SOUTH increases y, WEST decreases x, EAST
// increases x.
package noc_pkg;

  localparam int unsigned PREAMBLE_W   = 2;
  localparam int unsigned COORD_W      = 3;
  localparam int unsigned HDR_FIXED_W  = 24;   // fixed header bits below the preamble
  localparam int unsigned DEST_ENTRY_W = 2 * COORD_W + 1;
  localparam int unsigned MAX_MCAST    = 16;   // cap on destinations per packet
  localparam int unsigned NPORTS       = 5;

  // Router ports and a one-hot mask over them.
  typedef enum logic [2:0] {
    P_NORTH = 3'd0,
    P_SOUTH = 3'd1,
    P_WEST  = 3'd2,
    P_EAST  = 3'd3,
    P_LOCAL = 3'd4
  } port_e;

  typedef logic [NPORTS-1:0] port_mask_t;

  typedef enum logic [4:0] {
    MSG_DMA_RD_REQ  = 5'd1,   // header + {length, address} flit
    MSG_DMA_WR_REQ  = 5'd2,   // header + {length, address} flit + data flits
    MSG_DMA_RSP     = 5'd3,   // header + data flits
    MSG_P2P_REQ     = 5'd4,   // header + {length} flit, consumer to producer
    MSG_P2P_DATA    = 5'd5    // header (one or more destinations) + data flits
  } msg_e;

  typedef logic [COORD_W-1:0] coord_t;

  typedef struct packed {
    logic   valid;
    coord_t y;
    coord_t x;
  } dest_t;

  typedef struct packed {
    logic [4:0] ndest;
    logic [7:0] rsv;     // bits [2:0]: DMA word size of the transfer
    msg_e       msg;
    coord_t     src_y;
    coord_t     src_x;
  } hdr_fixed_t;

  // Number of destinations a header flit of the given payload width can hold.
  function automatic int unsigned dests_for_width(int unsigned data_w);
    int unsigned n;
    n = (data_w - HDR_FIXED_W) / DEST_ENTRY_W;
    return (n > MAX_MCAST) ? MAX_MCAST : n;
  endfunction

  // Dimension-ordered (XY) routing: output port at router (cx, cy) for a
  // packet bound to (dx, dy).
  function automatic port_e xy_route(coord_t cx, coord_t cy, coord_t dx, coord_t dy);
    if (dx > cx)      return P_EAST;
    else if (dx < cx) return P_WEST;
    else if (dy > cy) return P_SOUTH;
    else if (dy < cy) return P_NORTH;
    else              return P_LOCAL;
  endfunction

  function automatic port_mask_t port_onehot(port_e p);
    port_mask_t m;
    m = '0;
    m[p] = 1'b1;
    return m;
  endfunction

endpackage
