// acc_tile: accelerator tile, i.e. the accelerator socket with a traffic
// generator plugged in.
//
// The socket wraps the accelerator with its platform services: configuration
// registers and interrupt (cfg_regs), the TLB, the P2P source table
// (p2p_lut) and the DMA controller (dma_ctrl), which connects the four
// accelerator channels to the two DMA planes of the NoC. The tile exposes
// the local ports of its request-plane and response-plane routers, its
// configuration bus and its interrupt line. Its mesh position (my_x, my_y)
// and the memory tile's position are inputs, wired to constants by the SoC.
// The composition follows the socket of the design (cfg regs, TLB, DMA
// controller, IRQ around the accelerator); the private cache and the
// coherence planes are not part of this tile.
module acc_tile
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W    = 256,
  parameter int unsigned MAX_DEST  = dests_for_width(DATA_W),
  parameter int unsigned PLM_WORDS = 4096 * 8 / DATA_W,
  localparam int unsigned FLIT_W   = DATA_W + PREAMBLE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            my_x,
  input  coord_t            my_y,
  input  coord_t            mem_x,
  input  coord_t            mem_y,
  // configuration bus and interrupt
  input  logic              cfg_we,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  output logic              irq,
  // request plane local port
  output logic              req_out_valid,
  input  logic              req_out_ready,
  output logic [FLIT_W-1:0] req_out_flit,
  input  logic              req_in_valid,
  output logic              req_in_ready,
  input  logic [FLIT_W-1:0] req_in_flit,
  // response plane local port
  output logic              rsp_out_valid,
  input  logic              rsp_out_ready,
  output logic [FLIT_W-1:0] rsp_out_flit,
  input  logic              rsp_in_valid,
  output logic              rsp_in_ready,
  input  logic [FLIT_W-1:0] rsp_in_flit
);

  localparam int unsigned PPN_W = 12;

  // configuration
  logic             start, acc_busy, acc_done;
  logic [4:0]       src_user, dst_user;
  logic [31:0]      rd_base, wr_base, total_len, burst_len;
  logic             lut_we, tlb_we;
  logic [4:0]       lut_wr_idx;
  logic [2:0]       lut_wr_x, lut_wr_y;
  logic [3:0]       tlb_idx;
  logic [PPN_W-1:0] tlb_ppn;

  // accelerator channels
  logic [31:0]       rd_ctrl_index, rd_ctrl_length, wr_ctrl_index, wr_ctrl_length;
  logic [2:0]        rd_ctrl_size, wr_ctrl_size;
  logic [4:0]        rd_ctrl_user, wr_ctrl_user;
  logic              rd_ctrl_valid, rd_ctrl_ready, wr_ctrl_valid, wr_ctrl_ready;
  logic [DATA_W-1:0] rd_chnl_data, wr_chnl_data;
  logic              rd_chnl_valid, rd_chnl_ready, wr_chnl_valid, wr_chnl_ready;

  // socket internals
  logic [31:0] va [2];
  logic [31:0] pa [2];
  logic [1:0]  tlb_fault;
  logic [4:0]  lut_idx;
  coord_t      lut_x, lut_y;
  logic        rd_busy, wr_busy;

  cfg_regs #(.PPN_W(PPN_W)) u_cfg (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .start, .src_user, .dst_user, .rd_base, .wr_base, .total_len, .burst_len,
    .acc_busy, .acc_done, .irq,
    .lut_we, .lut_idx(lut_wr_idx), .lut_x(lut_wr_x), .lut_y(lut_wr_y),
    .tlb_we, .tlb_idx, .tlb_ppn
  );

  traffic_gen #(.DATA_W(DATA_W), .PLM_WORDS(PLM_WORDS)) u_acc (
    .clk, .rst_n,
    .start, .src_user, .dst_user, .rd_base, .wr_base, .total_len, .burst_len,
    .busy(acc_busy), .done(acc_done),
    .rd_ctrl_index, .rd_ctrl_length, .rd_ctrl_size, .rd_ctrl_user, .rd_ctrl_valid, .rd_ctrl_ready,
    .rd_chnl_data, .rd_chnl_valid, .rd_chnl_ready,
    .wr_ctrl_index, .wr_ctrl_length, .wr_ctrl_size, .wr_ctrl_user, .wr_ctrl_valid, .wr_ctrl_ready,
    .wr_chnl_data, .wr_chnl_valid, .wr_chnl_ready
  );

  tlb #(.ENTRIES(16), .PAGE_BITS(20), .ADDR_W(32), .NPORT(2)) u_tlb (
    .clk, .rst_n,
    .wr_en(tlb_we), .wr_idx(tlb_idx), .wr_ppn(tlb_ppn),
    .va, .pa, .fault(tlb_fault)
  );

  p2p_lut #(.ENTRIES(32)) u_lut (
    .clk, .rst_n,
    .wr_en(lut_we), .wr_idx(lut_wr_idx), .wr_x(lut_wr_x), .wr_y(lut_wr_y),
    .rd_idx(lut_idx), .rd_x(lut_x), .rd_y(lut_y)
  );

  dma_ctrl #(.DATA_W(DATA_W), .MAX_DEST(MAX_DEST)) u_dma (
    .clk, .rst_n,
    .my_x, .my_y, .mem_x, .mem_y,
    .rd_ctrl_index, .rd_ctrl_length, .rd_ctrl_size, .rd_ctrl_user, .rd_ctrl_valid, .rd_ctrl_ready,
    .rd_chnl_data, .rd_chnl_valid, .rd_chnl_ready,
    .wr_ctrl_index, .wr_ctrl_length, .wr_ctrl_size, .wr_ctrl_user, .wr_ctrl_valid, .wr_ctrl_ready,
    .wr_chnl_data, .wr_chnl_valid, .wr_chnl_ready,
    .rd_va(va[0]), .rd_pa(pa[0]), .wr_va(va[1]), .wr_pa(pa[1]),
    .lut_idx, .lut_x, .lut_y,
    .req_out_valid, .req_out_ready, .req_out_flit,
    .req_in_valid, .req_in_ready, .req_in_flit,
    .rsp_out_valid, .rsp_out_ready, .rsp_out_flit,
    .rsp_in_valid, .rsp_in_ready, .rsp_in_flit,
    .rd_busy, .wr_busy
  );

  // A DMA burst must stay inside the buffer the TLB maps.
  a_tlb_rd: assert property (@(posedge clk) disable iff (!rst_n) rd_busy |-> !tlb_fault[0]);
  a_tlb_wr: assert property (@(posedge clk) disable iff (!rst_n) wr_busy |-> !tlb_fault[1]);

endmodule
