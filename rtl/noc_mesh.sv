// noc_mesh: one physical plane of the 2D-mesh NoC, built of mcast_router.
//
// XDIM x YDIM routers; router (x, y) serves tile t = y * XDIM + x. Each
// router's NORTH/SOUTH/WEST/EAST ports connect to its neighbours, carrying
// the flit, its valid/ready pair and the lookahead route mask. The LOCAL
// ports are the plane's tile ports. Ports on the mesh edge are left
// unconnected: their inputs are idle and their outputs are always ready, and
// an assertion flags any flit that XY routing would send off the mesh (only
// a header with a destination outside the mesh can do that).
//
// Several planes (the design uses separate planes instead of virtual
// channels) are separate instances of this module. The default size,
// 5 x 4 tiles, is the evaluated SoC's layout; a 256-bit plane holds headers
// with 16 destinations.
module noc_mesh
  import noc_pkg::*;
#(
  parameter int unsigned XDIM     = 5,
  parameter int unsigned YDIM     = 4,
  parameter int unsigned DATA_W   = 256,
  parameter int unsigned MAX_DEST = dests_for_width(DATA_W),
  parameter int unsigned QDEPTH   = 4,
  localparam int unsigned NT      = XDIM * YDIM,
  localparam int unsigned FLIT_W  = DATA_W + PREAMBLE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // tile to NoC
  input  logic [NT-1:0]     inj_valid,
  output logic [NT-1:0]     inj_ready,
  input  logic [FLIT_W-1:0] inj_flit [NT],
  // NoC to tile
  output logic [NT-1:0]     ej_valid,
  input  logic [NT-1:0]     ej_ready,
  output logic [FLIT_W-1:0] ej_flit [NT]
);

  // Per-router port signals.
  logic       [NPORTS-1:0] r_in_valid  [NT];
  logic       [NPORTS-1:0] r_in_ready  [NT];
  logic       [FLIT_W-1:0] r_in_flit   [NT][NPORTS];
  port_mask_t              r_in_route  [NT][NPORTS];
  logic       [NPORTS-1:0] r_out_valid [NT];
  logic       [NPORTS-1:0] r_out_ready [NT];
  logic       [FLIT_W-1:0] r_out_flit  [NT][NPORTS];
  port_mask_t              r_out_route [NT][NPORTS];

  for (genvar y = 0; y < YDIM; y++) begin : g_y
    for (genvar x = 0; x < XDIM; x++) begin : g_x
      localparam int unsigned T = y * XDIM + x;

      mcast_router #(.DATA_W(DATA_W), .MAX_DEST(MAX_DEST), .QDEPTH(QDEPTH)) u_rtr (
        .clk, .rst_n,
        .pos_x    (coord_t'(x)),
        .pos_y    (coord_t'(y)),
        .in_valid (r_in_valid[T]),
        .in_ready (r_in_ready[T]),
        .in_flit  (r_in_flit[T]),
        .in_route (r_in_route[T]),
        .out_valid(r_out_valid[T]),
        .out_ready(r_out_ready[T]),
        .out_flit (r_out_flit[T]),
        .out_route(r_out_route[T])
      );

      // LOCAL port
      assign r_in_valid[T][P_LOCAL]  = inj_valid[T];
      assign r_in_flit[T][P_LOCAL]   = inj_flit[T];
      assign r_in_route[T][P_LOCAL]  = '0;
      assign inj_ready[T]            = r_in_ready[T][P_LOCAL];
      assign ej_valid[T]             = r_out_valid[T][P_LOCAL];
      assign ej_flit[T]              = r_out_flit[T][P_LOCAL];
      assign r_out_ready[T][P_LOCAL] = ej_ready[T];

      // NORTH input comes from the SOUTH output of router (x, y-1), etc.
      if (y > 0) begin : g_n
        localparam int unsigned U = (y - 1) * XDIM + x;
        assign r_in_valid[T][P_NORTH]  = r_out_valid[U][P_SOUTH];
        assign r_in_flit[T][P_NORTH]   = r_out_flit[U][P_SOUTH];
        assign r_in_route[T][P_NORTH]  = r_out_route[U][P_SOUTH];
        assign r_out_ready[T][P_NORTH] = r_in_ready[U][P_SOUTH];
      end else begin : g_n_edge
        assign r_in_valid[T][P_NORTH]  = 1'b0;
        assign r_in_flit[T][P_NORTH]   = '0;
        assign r_in_route[T][P_NORTH]  = '0;
        assign r_out_ready[T][P_NORTH] = 1'b1;
      end
      if (y < YDIM - 1) begin : g_s
        localparam int unsigned D = (y + 1) * XDIM + x;
        assign r_in_valid[T][P_SOUTH]  = r_out_valid[D][P_NORTH];
        assign r_in_flit[T][P_SOUTH]   = r_out_flit[D][P_NORTH];
        assign r_in_route[T][P_SOUTH]  = r_out_route[D][P_NORTH];
        assign r_out_ready[T][P_SOUTH] = r_in_ready[D][P_NORTH];
      end else begin : g_s_edge
        assign r_in_valid[T][P_SOUTH]  = 1'b0;
        assign r_in_flit[T][P_SOUTH]   = '0;
        assign r_in_route[T][P_SOUTH]  = '0;
        assign r_out_ready[T][P_SOUTH] = 1'b1;
      end
      if (x > 0) begin : g_w
        localparam int unsigned L = y * XDIM + x - 1;
        assign r_in_valid[T][P_WEST]  = r_out_valid[L][P_EAST];
        assign r_in_flit[T][P_WEST]   = r_out_flit[L][P_EAST];
        assign r_in_route[T][P_WEST]  = r_out_route[L][P_EAST];
        assign r_out_ready[T][P_WEST] = r_in_ready[L][P_EAST];
      end else begin : g_w_edge
        assign r_in_valid[T][P_WEST]  = 1'b0;
        assign r_in_flit[T][P_WEST]   = '0;
        assign r_in_route[T][P_WEST]  = '0;
        assign r_out_ready[T][P_WEST] = 1'b1;
      end
      if (x < XDIM - 1) begin : g_e
        localparam int unsigned R = y * XDIM + x + 1;
        assign r_in_valid[T][P_EAST]  = r_out_valid[R][P_WEST];
        assign r_in_flit[T][P_EAST]   = r_out_flit[R][P_WEST];
        assign r_in_route[T][P_EAST]  = r_out_route[R][P_WEST];
        assign r_out_ready[T][P_EAST] = r_in_ready[R][P_WEST];
      end else begin : g_e_edge
        assign r_in_valid[T][P_EAST]  = 1'b0;
        assign r_in_flit[T][P_EAST]   = '0;
        assign r_in_route[T][P_EAST]  = '0;
        assign r_out_ready[T][P_EAST] = 1'b1;
      end

      a_no_edge_exit: assert property (@(posedge clk) disable iff (!rst_n)
        !((y == 0        && r_out_valid[T][P_NORTH]) ||
          (y == YDIM - 1 && r_out_valid[T][P_SOUTH]) ||
          (x == 0        && r_out_valid[T][P_WEST])  ||
          (x == XDIM - 1 && r_out_valid[T][P_EAST])));
    end
  end

endmodule
