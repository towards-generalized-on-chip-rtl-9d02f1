// tb_esp_soc: end-to-end test of the SoC at its default size (5 x 4 mesh,
// 256-bit planes, 17 traffic generators, 4 KB bursts).
//
// Accelerator a's virtual page 0 maps to physical page a + 1, so every
// accelerator owns a distinct 1 MB region of the memory model. Phases:
//   1. Multicast: accelerator 0 reads NBEATS beats from memory and multicasts
//      each burst to NCONS consumers (accelerators 1 .. NCONS), which read
//      with P2P from source index 1 (= accelerator 0) and write to memory.
//   2. Shared-memory baseline: accelerator 0 writes its data to memory; then
//      the consumers read it there (their virtual page 1 maps to
//      accelerator 0's physical page) and write it back.
//   3. Unequal bursts: accelerator 0 sends by unicast P2P in 128-beat bursts
//      to accelerator 16, which reads in 32-beat bursts.
// Every consumer's output region is compared with the source data. The
// testbench counts, and requires at least once: DMA reads, DMA writes,
// multicast packets, unicast P2P packets, router forks (more P2P headers
// delivered than injected), packets split into chunks by a shorter consumer
// request, and NoC back-pressure (a flit held with valid and no ready).
// It prints the cycles of phases 1 and 2 and their ratio.
module tb_esp_soc;
  import noc_pkg::*;
  `include "tb_check.svh"

  localparam int unsigned DATA_W = 256;
  localparam int unsigned FLIT_W = DATA_W + 2;
  localparam int unsigned NACC   = 17;
  localparam int unsigned BEAT_B = DATA_W / 8;
  localparam int unsigned PAGE_BEATS = (1 << 20) / BEAT_B;
  localparam int unsigned NCONS  = 16;
  localparam int unsigned NBEATS = 256;   // 8 KB, two 4 KB bursts

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              cfg_we;
  logic [4:0]        cfg_acc;
  logic [7:0]        cfg_addr;
  logic [31:0]       cfg_wdata, cfg_rdata;
  logic [NACC-1:0]   irq;
  logic              mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic [FLIT_W-1:0] mem_req_flit, mem_rsp_flit;

  esp_soc dut (
    .clk, .rst_n, .cfg_we, .cfg_acc, .cfg_addr, .cfg_wdata, .cfg_rdata, .irq,
    .mem_req_valid, .mem_req_ready, .mem_req_flit,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_flit
  );

  mem_model #(.DATA_W(DATA_W), .LATENCY(20)) u_mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_flit(mem_req_flit),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_flit(mem_rsp_flit)
  );

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // --------------------------------------------------------------- counters
  int n_mcast = 0, n_ucast = 0, n_p2p_inj = 0, n_p2p_ej = 0, n_stall = 0;
  int n_p2p_pkts_phase3 = 0;
  bit phase3 = 0;
  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < 20; t++) begin
      hdr_fixed_t h;
      if (dut.p_inj_valid[t] && dut.p_inj_ready[t] && dut.p_inj_flit[t][FLIT_W-1]) begin
        h = hdr_fixed_t'(dut.p_inj_flit[t][HDR_FIXED_W-1:0]);
        if (h.msg == MSG_P2P_DATA) begin
          n_p2p_inj++;
          if (h.ndest > 1) n_mcast++; else n_ucast++;
          if (phase3) n_p2p_pkts_phase3++;
        end
      end
      if (dut.p_ej_valid[t] && dut.p_ej_ready[t] && dut.p_ej_flit[t][FLIT_W-1]) begin
        h = hdr_fixed_t'(dut.p_ej_flit[t][HDR_FIXED_W-1:0]);
        if (h.msg == MSG_P2P_DATA) n_p2p_ej++;
      end
      if ((dut.p_inj_valid[t] && !dut.p_inj_ready[t]) || (dut.q_inj_valid[t] && !dut.q_inj_ready[t]))
        n_stall++;
    end
  end

  // ------------------------------------------------------------- helpers
  task automatic cfg(input int acc, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_acc = 5'(acc); cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic setup(input int acc, input int src, input int dst, input int rdb,
                       input int wrb, input int total, input int burst);
    cfg(acc, 8'h02, src); cfg(acc, 8'h03, dst);
    cfg(acc, 8'h04, rdb); cfg(acc, 8'h05, wrb);
    cfg(acc, 8'h06, total); cfg(acc, 8'h07, burst);
  endtask

  function automatic logic [DATA_W-1:0] pattern(int unsigned i);
    logic [DATA_W-1:0] d;
    for (int w = 0; w < DATA_W / 32; w++) d[w*32 +: 32] = 32'hC0DE_0000 ^ (i * 32'h9E37_79B9) ^ w;
    return d;
  endfunction

  // Accelerator a, tile coordinates (row-major, skipping Mem, CPU and IO tiles).
  function automatic int tile_of(int a);
    int n = 0;
    for (int t = 0; t < 20; t++)
      if (t != 0 && t != 1 && t != 6) begin
        if (n == a) return t;
        n++;
      end
    return -1;
  endfunction

  task automatic wait_irq(input logic [NACC-1:0] m, input int limit, output int took);
    int t0 = cyc;
    while (((irq & m) != m) && (cyc - t0 < limit)) @(posedge clk);
    took = cyc - t0;
    `CHECK((irq & m) == m, "accelerators raised their interrupts")
  endtask

  task automatic check_region(input int acc, input int base_beat, input int n, input string what);
    int bad = 0;
    for (int i = 0; i < n; i++)
      if (u_mem.peek((acc + 1) * PAGE_BEATS + base_beat + i) != pattern(i)) bad++;
    `CHECK(bad == 0, what)
    if (bad != 0) $display("  accelerator %0d: %0d wrong beats", acc, bad);
  endtask

  logic [NACC-1:0] cons_mask;
  int t_mcast, t_base1, t_base2, t_tmp;

  initial begin
    cfg_we = 0; cfg_acc = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    cons_mask = '0;
    for (int c = 1; c <= NCONS; c++) cons_mask[c] = 1'b1;

    // TLBs and source tables
    for (int a = 0; a < NACC; a++) begin
      cfg(a, 8'h40, a + 1);       // virtual page 0 -> own region
      cfg(a, 8'h41, 1);           // virtual page 1 -> accelerator 0's region
      cfg(a, 8'h21, (tile_of(0) / 5) << 3 | (tile_of(0) % 5));   // source 1 = accelerator 0
    end
    for (int i = 0; i < NBEATS; i++) u_mem.poke(1 * PAGE_BEATS + i, pattern(i));

    // ---- phase 1: multicast
    for (int c = 1; c <= NCONS; c++) setup(c, 1, 0, 0, 0, NBEATS, 128);
    setup(0, 0, NCONS, 0, 4096, NBEATS, 128);
    for (int c = 1; c <= NCONS; c++) cfg(c, 8'h00, 1);
    cfg(0, 8'h00, 1);
    wait_irq(cons_mask | 17'b1, 50000, t_mcast);
    repeat (2000) @(posedge clk);   // writes still travel to memory after done
    for (int c = 1; c <= NCONS; c++) check_region(c, 0, NBEATS, "multicast data reached memory through every consumer");
    `CHECK(n_mcast == NBEATS / 128, "one multicast packet per producer burst")
    `CHECK(n_p2p_ej == NCONS * n_mcast, "every consumer received each multicast packet once")

    // ---- phase 2: shared-memory baseline
    repeat (50) @(posedge clk);
    setup(0, 0, 0, 0, 8192, NBEATS, 128);
    cfg(0, 8'h00, 1);
    wait_irq(17'b1, 50000, t_base1);
    repeat (50) @(posedge clk);   // let the last write drain into memory
    check_region(0, 8192, NBEATS, "producer wrote its output to memory");
    for (int c = 1; c <= NCONS; c++) setup(c, 0, 0, PAGE_BEATS + 8192, 16384, NBEATS, 128);
    for (int c = 1; c <= NCONS; c++) cfg(c, 8'h00, 1);
    wait_irq(cons_mask, 50000, t_base2);
    repeat (2000) @(posedge clk);
    for (int c = 1; c <= NCONS; c++) check_region(c, 16384, NBEATS, "baseline data reached memory through every consumer");
    $display("multicast: %0d cycles, shared memory: %0d cycles, speedup %0d%%",
             t_mcast, t_base1 + t_base2 + 100, ((t_base1 + t_base2 + 100) * 100) / t_mcast - 100);
    `CHECK(t_mcast < t_base1 + t_base2, "multicast is faster than the shared-memory baseline")

    // ---- phase 3: unicast P2P with different burst sizes
    phase3 = 1;
    setup(16, 1, 0, 0, 24576, NBEATS, 32);
    setup(0, 0, 1, 0, 4096, NBEATS, 128);
    cfg(16, 8'h00, 1);
    cfg(0, 8'h00, 1);
    wait_irq(17'b1 | (17'b1 << 16), 50000, t_tmp);
    repeat (50) @(posedge clk);
    check_region(16, 24576, NBEATS, "unicast P2P with unequal bursts");
    `CHECK(n_p2p_pkts_phase3 == NBEATS / 32, "producer bursts split into consumer-sized chunks")

    // ---- mechanisms seen
    $display("DMA reads %0d, DMA writes %0d, multicast pkts %0d, unicast P2P pkts %0d, P2P headers injected %0d delivered %0d, stall cycles %0d",
             u_mem.n_reads, u_mem.n_writes, n_mcast, n_ucast, n_p2p_inj, n_p2p_ej, n_stall);
    `CHECK(u_mem.n_reads > 0, "DMA read happened")
    `CHECK(u_mem.n_writes > 0, "DMA write happened")
    `CHECK(n_mcast > 0, "multicast happened")
    `CHECK(n_ucast > 0, "unicast P2P happened")
    `CHECK(n_p2p_ej > n_p2p_inj, "a router forked a packet")
    `CHECK(n_p2p_pkts_phase3 > NBEATS / 128, "chunk split happened")
    `CHECK(n_stall > 0, "NoC back-pressure happened")

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
