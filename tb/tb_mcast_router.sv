// tb_mcast_router: the multicast router at mesh position (2,1), 64-bit
// flits' payload (5 destinations per header).
//   1. A 3-flit packet from LOCAL to five destinations, one behind each
//      output: every output gets the packet once, its header keeps only its
//      own destination, the next-hop mask is the lookahead result, and the
//      header appears one cycle after it was written into the input queue.
//   2. Two destinations behind EAST: one copy with both entries, next-hop
//      mask NORTH|EAST.
//   3. Two inputs competing for EAST: packets leave whole, one after the other.
//   4. Back-pressure on one branch of a multicast: the other branch goes on,
//      and the held branch gets the whole packet once ready returns.
// Expected headers and masks are written out by hand from XY routing.
module tb_mcast_router;
  import noc_pkg::*;
  `include "tb_check.svh"
  localparam int DW = 64, FW = DW + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  logic [FW-1:0] in_flit [5];
  port_mask_t in_route [5];
  logic [FW-1:0] out_flit [5];
  port_mask_t out_route [5];
  int checks = 0, failures = 0;

  mcast_router #(.DATA_W(DW)) dut (.clk, .rst_n, .pos_x(3'd2), .pos_y(3'd1), .*);

  // monitors
  logic [FW-1:0] got [5][$];
  port_mask_t    got_route [5][$];
  int            got_cyc [5][$];
  int unsigned cyc = 0;
  int unsigned in_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid[P_LOCAL] && in_ready[P_LOCAL] && in_flit[P_LOCAL][FW-1]) in_cyc <= cyc;
    for (int o = 0; o < 5; o++)
      if (rst_n && out_valid[o] && out_ready[o]) begin
        got[o].push_back(out_flit[o]);
        got_route[o].push_back(out_route[o]);
        got_cyc[o].push_back(cyc);
      end
  end

  function automatic logic [FW-1:0] hdr(int n, int dx [], int dy []);
    logic [FW-1:0] f = '0;
    f[FW-1] = 1'b1;
    f[HDR_FIXED_W-1:0] = {5'(n), 8'd0, MSG_P2P_DATA, 3'd1, 3'd2};
    for (int j = 0; j < n; j++) f[HDR_FIXED_W + 7*j +: 7] = {1'b1, 3'(dy[j]), 3'(dx[j])};
    return f;
  endfunction
  function automatic logic [FW-1:0] body(int v, bit tail);
    return {1'b0, tail, 64'(v)};
  endfunction
  // Expected header copy: only entry k valid, count 1.
  function automatic logic [FW-1:0] keep(logic [FW-1:0] h, int n, logic [15:0] km);
    logic [FW-1:0] f = h;
    int c = 0;
    for (int j = 0; j < n; j++) if (!km[j]) f[HDR_FIXED_W + 7*j + 6] = 1'b0; else c++;
    f[HDR_FIXED_W-1 -: 5] = 5'(c);
    return f;
  endfunction

  task automatic send(int i, logic [FW-1:0] f, port_mask_t r);
    @(negedge clk);
    in_valid[i] = 1; in_flit[i] = f; in_route[i] = r;
    do @(posedge clk); while (!in_ready[i]);
    @(negedge clk);
    in_valid[i] = 0;
  endtask

  task automatic clear();
    for (int o = 0; o < 5; o++) begin got[o].delete(); got_route[o].delete(); got_cyc[o].delete(); end
  endtask

  initial begin
    logic [FW-1:0] h;
    in_valid = 0; out_ready = '1;
    for (int i = 0; i < 5; i++) begin in_flit[i] = 0; in_route[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;

    // ---- 1: five destinations, one per output (E, W, N, S, LOCAL)
    h = hdr(5, '{4, 0, 2, 2, 2}, '{1, 3, 0, 3, 1});
    send(P_LOCAL, h, '0);
    send(P_LOCAL, body(11, 0), '0);
    send(P_LOCAL, body(12, 1), '0);
    repeat (5) @(posedge clk);
    for (int o = 0; o < 5; o++) `CHECK(got[o].size() == 3, "every output got the 3 flits")
    `CHECK(got[P_EAST][0]  == keep(h, 5, 16'b00001), "EAST header keeps (4,1) only")
    `CHECK(got[P_WEST][0]  == keep(h, 5, 16'b00010), "WEST header keeps (0,3) only")
    `CHECK(got[P_NORTH][0] == keep(h, 5, 16'b00100), "NORTH header keeps (2,0) only")
    `CHECK(got[P_SOUTH][0] == keep(h, 5, 16'b01000), "SOUTH header keeps (2,3) only")
    `CHECK(got[P_LOCAL][0] == keep(h, 5, 16'b10000), "LOCAL header keeps (2,1) only")
    `CHECK(got_route[P_EAST][0]  == 5'b01000, "EAST next hop: EAST")
    `CHECK(got_route[P_WEST][0]  == 5'b00100, "WEST next hop: WEST")
    `CHECK(got_route[P_NORTH][0] == 5'b10000, "NORTH next hop: LOCAL")
    `CHECK(got_route[P_SOUTH][0] == 5'b00010, "SOUTH next hop: SOUTH")
    `CHECK(got_route[P_LOCAL][0] == 5'b00000, "LOCAL: no next hop")
    for (int o = 0; o < 5; o++) begin
      `CHECK(got[o][1] == body(11, 0) && got[o][2] == body(12, 1), "body flits copied")
      `CHECK(got_cyc[o][0] == in_cyc + 1, "header leaves one cycle after it is queued")
    end
    clear();

    // ---- 2: two destinations behind EAST
    h = hdr(2, '{3, 4}, '{0, 2});
    send(P_LOCAL, h | {1'b0, 1'b1, 64'd0}, '0);   // one-flit packet
    repeat (4) @(posedge clk);
    `CHECK(got[P_EAST].size() == 1 && got[P_NORTH].size() == 0 && got[P_SOUTH].size() == 0, "one copy on EAST")
    if (got[P_EAST].size() == 1) begin
      `CHECK(got[P_EAST][0] == keep(h | {1'b0, 1'b1, 64'd0}, 2, 16'b11), "both entries kept")
      `CHECK(got_route[P_EAST][0] == 5'b01001, "next hop NORTH|EAST")
    end
    clear();

    // ---- 3: WEST and NORTH inputs both to EAST (4,1)
    h = hdr(1, '{4}, '{1});
    fork
      begin send(P_WEST, h, 5'b01000); send(P_WEST, body(21, 0), '0); send(P_WEST, body(22, 1), '0); end
      begin send(P_NORTH, h, 5'b01000); send(P_NORTH, body(31, 0), '0); send(P_NORTH, body(32, 1), '0); end
    join
    repeat (6) @(posedge clk);
    `CHECK(got[P_EAST].size() == 6, "both packets out on EAST")
    if (got[P_EAST].size() == 6) begin
      `CHECK(got[P_EAST][0][FW-1] && got[P_EAST][3][FW-1], "headers at positions 0 and 3")
      `CHECK(got[P_EAST][2][FW-2] && got[P_EAST][5][FW-2], "packets not interleaved")
      `CHECK((got[P_EAST][1][7:0] / 10) == (got[P_EAST][2][7:0] / 10), "body flits of one packet together")
    end
    clear();

    // ---- 4: back-pressure on SOUTH during a 2-way multicast (EAST + SOUTH)
    h = hdr(2, '{4, 2}, '{1, 3});
    out_ready[P_SOUTH] = 0;
    send(P_LOCAL, h, '0);
    send(P_LOCAL, body(41, 0), '0);
    repeat (3) @(posedge clk);
    `CHECK(got[P_EAST].size() >= 1 && got[P_SOUTH].size() == 0, "EAST proceeds while SOUTH is held")
    @(negedge clk); out_ready[P_SOUTH] = 1;
    send(P_LOCAL, body(42, 1), '0);
    repeat (5) @(posedge clk);
    `CHECK(got[P_EAST].size() == 3 && got[P_SOUTH].size() == 3, "both branches got the whole packet")
    if (got[P_SOUTH].size() == 3) `CHECK(got[P_SOUTH][2] == body(42, 1), "SOUTH tail")

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
