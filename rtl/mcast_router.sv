// mcast_router: five-port wormhole router of the multicast NoC.
//
// Each of the five inputs (NORTH, SOUTH, WEST, EAST, LOCAL) has an input
// queue. A packet is a header flit, any number of body flits and a tail flit
// (a one-flit packet has both the head and the tail bit set). The header
// carries a list of up to MAX_DEST destinations instead of a single one.
//
// Routing. Every input carries, next to its flit, the output-port mask the
// upstream router computed for this router (lookahead routing). A header at
// the head of a queue requests exactly those output ports, so output
// allocation needs no routing in the same cycle. In parallel, one
// lookahead_route unit per destination entry works out the port each
// destination leaves by here and the port it will need at the next router.
// Packets injected at the LOCAL input have no upstream router; their request
// mask is formed from these per-destination ports instead.
//
// Multicast. A header may request several output ports. For each of them the
// router sends a copy of the header in which only the destinations reached
// through that port stay valid (and the destination count is rewritten), and
// the next-hop mask on that port is the OR of those destinations' lookahead
// results. Body flits are copied to all ports of the packet. The ports of one
// packet accept a flit independently; a flit leaves its queue once every port
// of the packet has taken it, so a slow branch holds back the others only by
// the depth of one flit.
//
// Allocation. A header is granted all its ports at once or none: inputs are
// visited in a rotating order and an input wins if every port it asks for is
// free and not taken by an earlier input in the same cycle. Ports stay held
// until the tail flit leaves. All-or-nothing allocation keeps two multicast
// packets from each holding a port the other one waits for.
//
// Timing. A flit written into an input queue at one clock edge can leave on
// an output at the next edge into the downstream queue: one cycle per hop.
// Outputs are driven combinationally from the queue heads; out_valid does
// not depend on out_ready.
//
// Following the design: list of destinations in the header, per-destination
// replicated lookahead routing, forwarding to several output ports in
// parallel, XY dimension-ordered routing, one-cycle hops. This design's own
// choices: the header layout (see noc_pkg), the queue depth, the per-port
// pruning of the destination list, the all-or-nothing rotating allocator and
// the on/off (valid/ready) flow control.
module mcast_router
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W   = 256,
  parameter int unsigned MAX_DEST = dests_for_width(DATA_W),
  parameter int unsigned QDEPTH   = 4,
  localparam int unsigned FLIT_W  = DATA_W + PREAMBLE_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  coord_t                  pos_x,
  input  coord_t                  pos_y,
  input  logic       [NPORTS-1:0] in_valid,
  output logic       [NPORTS-1:0] in_ready,
  input  logic       [FLIT_W-1:0] in_flit  [NPORTS],
  input  port_mask_t              in_route [NPORTS],
  output logic       [NPORTS-1:0] out_valid,
  input  logic       [NPORTS-1:0] out_ready,
  output logic       [FLIT_W-1:0] out_flit  [NPORTS],
  output port_mask_t              out_route [NPORTS]
);

  localparam int unsigned QW = FLIT_W + NPORTS;

  // ---------------------------------------------------------------- queues
  logic       [NPORTS-1:0] hv;
  logic       [NPORTS-1:0] pop;
  logic       [FLIT_W-1:0] hflit  [NPORTS];
  port_mask_t              hroute [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_q
    logic [QW-1:0] qout;
    noc_fifo #(.WIDTH(QW), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .in_valid (in_valid[i]),
      .in_ready (in_ready[i]),
      .in_data  ({in_route[i], in_flit[i]}),
      .out_valid(hv[i]),
      .out_ready(pop[i]),
      .out_data (qout)
    );
    assign hflit[i]  = qout[FLIT_W-1:0];
    assign hroute[i] = qout[QW-1:FLIT_W];
  end

  // ------------------------------------- per-destination lookahead routing
  port_e      dport [NPORTS][MAX_DEST];
  port_mask_t dnext [NPORTS][MAX_DEST];
  dest_t      dent  [NPORTS][MAX_DEST];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    for (genvar j = 0; j < MAX_DEST; j++) begin : g_dst
      assign dent[i][j] = dest_t'(hflit[i][HDR_FIXED_W + j*DEST_ENTRY_W +: DEST_ENTRY_W]);
      lookahead_route u_la (
        .cur_x    (pos_x),
        .cur_y    (pos_y),
        .dst_x    (dent[i][j].x),
        .dst_y    (dent[i][j].y),
        .port_here(dport[i][j]),
        .next_mask(dnext[i][j])
      );
    end
  end

  // Request mask of each input's head flit and the per-output header copies.
  port_mask_t              req      [NPORTS];
  port_mask_t              local_req[NPORTS];
  logic       [FLIT_W-1:0] hcopy    [NPORTS][NPORTS];   // [input][output]
  port_mask_t              hla      [NPORTS][NPORTS];   // [input][output]

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      local_req[i] = '0;
      for (int j = 0; j < MAX_DEST; j++)
        if (dent[i][j].valid) local_req[i] |= port_onehot(dport[i][j]);
      req[i] = (i == int'(P_LOCAL)) ? local_req[i] : hroute[i];
      for (int o = 0; o < NPORTS; o++) begin
        logic [4:0] cnt;
        cnt         = '0;
        hcopy[i][o] = hflit[i];
        hla[i][o]   = '0;
        for (int j = 0; j < MAX_DEST; j++) begin
          if (dent[i][j].valid && dport[i][j] == port_e'(o)) begin
            cnt       = cnt + 1'b1;
            hla[i][o] |= dnext[i][j];
          end else begin
            hcopy[i][o][HDR_FIXED_W + j*DEST_ENTRY_W + DEST_ENTRY_W - 1] = 1'b0;
          end
        end
        hcopy[i][o][HDR_FIXED_W-1 -: 5] = cnt;
      end
    end
  end

  // ------------------------------------------------------------ allocation
  logic       [NPORTS-1:0] busy;
  port_mask_t              hold [NPORTS];
  logic       [NPORTS-1:0] sent [NPORTS];
  logic       [2:0]        prio;
  logic       [NPORTS-1:0] grant;
  port_mask_t              eff  [NPORTS];
  port_mask_t              held;

  always_comb begin
    port_mask_t taken;
    held = '0;
    for (int i = 0; i < NPORTS; i++)
      if (busy[i]) held |= hold[i];
    taken = held;
    grant = '0;
    for (int k = 0; k < NPORTS; k++) begin
      int unsigned i;
      i = (32'(prio) + 32'(k)) % NPORTS;
      if (hv[i] && hflit[i][FLIT_W-1] && !busy[i] && ((req[i] & taken) == '0)) begin
        grant[i] = 1'b1;
        taken   |= req[i];
      end
    end
    for (int i = 0; i < NPORTS; i++)
      eff[i] = busy[i] ? hold[i] : (grant[i] ? req[i] : '0);
  end

  // -------------------------------------------------------------- crossbar
  logic [NPORTS-1:0] acc [NPORTS];   // [input] mask of outputs taking the flit now

  always_comb begin
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = 1'b0;
      out_flit[o]  = '0;
      out_route[o] = '0;
      for (int i = 0; i < NPORTS; i++) begin
        if (eff[i][o]) begin
          out_valid[o] = hv[i] && !sent[i][o];
          out_flit[o]  = hflit[i][FLIT_W-1] ? hcopy[i][o] : hflit[i];
          out_route[o] = hflit[i][FLIT_W-1] ? hla[i][o] : '0;
        end
      end
    end
    for (int i = 0; i < NPORTS; i++) begin
      acc[i] = eff[i] & ~sent[i] & out_ready & {NPORTS{hv[i]}};
      pop[i] = hv[i] && (busy[i] || grant[i]) && (((sent[i] | acc[i]) & eff[i]) == eff[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      prio <= '0;
      for (int i = 0; i < NPORTS; i++) begin
        hold[i] <= '0;
        sent[i] <= '0;
      end
    end else begin
      if (grant != '0) prio <= (prio == 3'(NPORTS - 1)) ? '0 : prio + 1'b1;
      for (int i = 0; i < NPORTS; i++) begin
        sent[i] <= pop[i] ? '0 : (sent[i] | acc[i]);
        if (grant[i]) hold[i] <= req[i];
        if (pop[i] && hflit[i][FLIT_W-2]) busy[i] <= 1'b0;
        else if (grant[i])                busy[i] <= 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ assertions
  // The lookahead mask that came with a header must match what this router
  // computes for the header's destinations.
  for (genvar i = 0; i < NPORTS - 1; i++) begin : g_chk
    a_lookahead: assert property (@(posedge clk) disable iff (!rst_n)
      (hv[i] && hflit[i][FLIT_W-1] && !busy[i]) |-> (hroute[i] == local_req[i]));
  end
  // A body flit never reaches the head of a queue without a packet in flight.
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk_body
    a_body_owned: assert property (@(posedge clk) disable iff (!rst_n)
      (hv[i] && !hflit[i][FLIT_W-1]) |-> busy[i]);
  end

endmodule
