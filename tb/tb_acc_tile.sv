// tb_acc_tile: one accelerator tile (default 256-bit NoC) wired straight to
// the behavioural memory tile, without a mesh: request-plane output to the
// memory's request input, the memory's responses to the response-plane
// input. The testbench programs the tile through its configuration port
// (TLB pages, user fields, bases, lengths), starts a memory-to-memory run of
// 100 beats in bursts of 64, and checks the status register, the interrupt,
// that the data land in the physical page the TLB names, that the source
// page is unchanged, and that only a start command clears the interrupt.
module tb_acc_tile;
  import noc_pkg::*;
  `include "tb_check.svh"
  localparam int unsigned DATA_W = 256;
  localparam int unsigned FLIT_W = DATA_W + 2;
  localparam int unsigned BEAT_B = DATA_W / 8;
  localparam int unsigned PAGE_BEATS = (1 << 20) / BEAT_B;
  localparam int unsigned NBEATS = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [7:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata; logic irq;
  logic req_out_valid, req_out_ready, req_in_valid, req_in_ready;
  logic rsp_out_valid, rsp_out_ready, rsp_in_valid, rsp_in_ready;
  logic [FLIT_W-1:0] req_out_flit, req_in_flit, rsp_out_flit, rsp_in_flit;

  acc_tile u_tile (
    .clk, .rst_n, .my_x(3'd2), .my_y(3'd1), .mem_x(3'd0), .mem_y(3'd0),
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .irq,
    .req_out_valid, .req_out_ready, .req_out_flit,
    .req_in_valid, .req_in_ready, .req_in_flit,
    .rsp_out_valid, .rsp_out_ready, .rsp_out_flit,
    .rsp_in_valid, .rsp_in_ready, .rsp_in_flit
  );

  mem_model #(.DATA_W(DATA_W), .LATENCY(20), .MY_X(0), .MY_Y(0)) u_mem (
    .clk, .rst_n,
    .req_valid(req_out_valid), .req_ready(req_out_ready), .req_flit(req_out_flit),
    .rsp_valid(rsp_in_valid), .rsp_ready(rsp_in_ready), .rsp_flit(rsp_in_flit)
  );
  assign req_in_valid  = 1'b0;
  assign req_in_flit   = '0;
  assign rsp_out_ready = 1'b1;

  int p2p_out = 0;
  always @(posedge clk) if (rsp_out_valid) p2p_out++;

  function automatic logic [DATA_W-1:0] pattern(int unsigned i);
    logic [DATA_W-1:0] d;
    for (int w = 0; w < DATA_W / 32; w++) d[w*32 +: 32] = 32'hA11C_0000 ^ (i * 32'h9E37_79B9) ^ w;
    return d;
  endfunction

  task automatic cfg(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic rd_status(output logic [31:0] s);
    @(negedge clk);
    cfg_addr = 8'h01;
    #1 s = cfg_rdata;
  endtask

  initial begin
    logic [31:0] s;
    int bad, t0;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int i = 0; i < NBEATS; i++) u_mem.poke(5 * PAGE_BEATS + i, pattern(i));
    repeat (3) @(posedge clk); rst_n = 1'b1;
    cfg(8'h40, 3);                    // virtual page 0 -> physical page 3
    cfg(8'h41, 5);                    // virtual page 1 -> physical page 5
    cfg(8'h02, 0);                    // read from memory
    cfg(8'h03, 0);                    // write to memory
    cfg(8'h04, PAGE_BEATS);           // read virtual page 1
    cfg(8'h05, 0);                    // write virtual page 0
    cfg(8'h06, NBEATS);
    cfg(8'h07, 64);
    rd_status(s);
    `CHECK(s[1:0] == 2'b00, "idle, no interrupt before start")
    cfg(8'h00, 1);
    rd_status(s);
    `CHECK(s[1] == 1'b1, "busy after start")
    t0 = 0;
    while (!irq && t0 < 50000) begin @(posedge clk); t0++; end
    `CHECK(irq, "interrupt raised at the end of the run")
    rd_status(s);
    `CHECK(s[1:0] == 2'b01, "status: not busy, interrupt pending")
    repeat (500) @(posedge clk);      // let the last write packet reach memory
    bad = 0;
    for (int i = 0; i < NBEATS; i++) if (u_mem.peek(3 * PAGE_BEATS + i) != pattern(i)) bad++;
    `CHECK(bad == 0, "data copied into the page the TLB maps")
    if (bad != 0) $display("  %0d wrong beats", bad);
    `CHECK(u_mem.peek(3 * PAGE_BEATS + NBEATS) == '0, "nothing written past the end")
    bad = 0;
    for (int i = 0; i < NBEATS; i++) if (u_mem.peek(5 * PAGE_BEATS + i) != pattern(i)) bad++;
    `CHECK(bad == 0, "source page unchanged")
    `CHECK(u_mem.n_reads >= 2 && u_mem.n_writes >= 2, "at least two read and two write requests")
    `CHECK(p2p_out == 0, "no P2P data sent in memory mode")
    cfg(8'h00, 0);
    `CHECK(irq, "CMD write without the start bit keeps the interrupt")
    cfg(8'h06, 0);                    // zero-length run: start only clears irq
    cfg(8'h00, 1);
    `CHECK(!irq, "start clears the interrupt")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
