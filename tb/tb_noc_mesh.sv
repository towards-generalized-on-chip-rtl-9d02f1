// tb_noc_mesh: one 5 x 4 plane with 64-bit payload (5 destinations per
// header).
//   1. Latency: one packet from (0,0) to (4,3), 7 hops, on an idle mesh is
//      ejected 8 cycles after it was injected (one cycle per router).
//   2. Traffic: every tile sends 6 packets (header + 2 body flits) to a
//      random tile, except tile 7, which multicasts each of its packets to 2
//      to 5 random distinct tiles; the ejection ports are ready only at
//      random. (Several multicasts at once whose branches block each other
//      can deadlock a wormhole tree multicast; the design does not prevent
//      that, so only one tile multicasts here.) Each destination must receive each packet exactly once, whole,
//      with the source in its header; no tile may receive a packet not
//      addressed to it.
module tb_noc_mesh;
  import noc_pkg::*;
  `include "tb_check.svh"
  localparam int DW = 64, FW = DW + 2, X = 5, Y = 4, NT = X * Y, NPKT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NT-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  logic [FW-1:0] inj_flit [NT];
  logic [FW-1:0] ej_flit [NT];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  noc_mesh #(.XDIM(X), .YDIM(Y), .DATA_W(DW)) dut (.*);

  logic [FW-1:0] txq [NT][$];
  int expect_cnt [NT][int];    // [dest][packet id] -> copies still expected
  int n_recv = 0, n_bad = 0, n_expected = 0, n_stall = 0;
  bit random_ready = 0;
  int unsigned inj_c, ej_c;

  function automatic logic [FW-1:0] hdr(int src, int n, int d []);
    logic [FW-1:0] f = '0;
    f[FW-1] = 1'b1;
    f[HDR_FIXED_W-1:0] = {5'(n), 8'd0, MSG_P2P_DATA, 3'(src / X), 3'(src % X)};
    for (int j = 0; j < n; j++) f[HDR_FIXED_W + 7*j +: 7] = {1'b1, 3'(d[j] / X), 3'(d[j] % X)};
    return f;
  endfunction

  // drivers and receivers
  int cur_id [NT];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int t = 0; t < NT; t++) begin
      if (inj_valid[t] && inj_ready[t]) begin
        if (inj_flit[t][FW-1]) inj_c = cyc;
        void'(txq[t].pop_front());
      end
      if (inj_valid[t] && !inj_ready[t]) n_stall++;
      if (rst_n && ej_valid[t] && ej_ready[t]) begin
        if (ej_flit[t][FW-1]) ej_c = cyc;
        else begin
          int id;
          id = int'(ej_flit[t][31:0]);
          if (ej_flit[t][FW-2]) begin
            n_recv++;
            if (expect_cnt[t].exists(id) && expect_cnt[t][id] > 0) expect_cnt[t][id]--;
            else n_bad++;
          end
        end
      end
    end
  end
  always_comb
    for (int t = 0; t < NT; t++) begin
      inj_valid[t] = txq[t].size() > 0;
      inj_flit[t]  = inj_valid[t] ? txq[t][0] : '0;
    end
  always @(negedge clk) ej_ready <= random_ready ? NT'({$urandom}) : '1;

  initial begin
    ej_ready = '1;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- 1: latency
    @(negedge clk);
    txq[0].push_back(hdr(0, 1, '{19}) | {1'b0, 1'b1, 64'd0});
    repeat (20) @(posedge clk);
    `CHECK(ej_c - inj_c == 8, "7 hops take 8 cycles from injection to ejection")
    $display("latency (0,0)->(4,3): %0d cycles", ej_c - inj_c);

    // ---- 2: random multicast traffic
    random_ready = 1;
    @(negedge clk);
    for (int t = 0; t < NT; t++)
      for (int p = 0; p < NPKT; p++) begin
        int n, id;
        int d [];
        n  = (t == 7) ? 2 + ($urandom % 4) : 1;
        d  = new[n];
        id = t * 100 + p;
        for (int j = 0; j < n; j++) begin
          bit dup;
          do begin
            d[j] = $urandom % NT; dup = 0;
            for (int k = 0; k < j; k++) if (d[k] == d[j]) dup = 1;
          end while (dup);
          expect_cnt[d[j]][id] = 1;
          n_expected++;
        end
        txq[t].push_back(hdr(t, n, d));
        txq[t].push_back({2'b00, 32'hB0D1, 32'(id)});
        txq[t].push_back({2'b01, 32'hB0D2, 32'(id)});
      end
    repeat (3000) @(posedge clk);
    `CHECK(n_recv == n_expected, "every destination received its packets")
    `CHECK(n_bad == 0, "no duplicate or misdelivered packet")
    begin
      int left = 0;
      for (int t = 0; t < NT; t++)
        for (int id = 0; id < NT * 100; id++)
          if (expect_cnt[t].exists(id)) left += expect_cnt[t][id];
      `CHECK(left == 0, "no copy missing")
    end
    `CHECK(n_stall > 0, "back-pressure reached the injection ports")
    $display("delivered %0d of %0d copies, %0d stall cycles", n_recv, n_expected, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
