// esp_soc: many-accelerator SoC with the multicast DMA planes.
//
// The default is the evaluated layout: a mesh of 5 columns by 4 rows, with
// the memory tile at (0,0), the CPU tile at (1,0), the I/O tile at (1,1) and
// a traffic-generator accelerator tile (acc_tile) everywhere else: 17
// accelerators. Two 256-bit NoC planes (noc_mesh) link the tiles: the request
// plane (DMA requests, P2P requests) and the response plane (DMA read data,
// P2P and multicast data).
//
// The CPU, memory and I/O tiles are not part of this RTL. Their roles reach
// the ports instead:
//   * the memory tile's local ports on both planes (mem_req_* is what the
//     request plane delivers to memory, mem_rsp_* what memory sends on the
//     response plane);
//   * the CPU's access to the accelerators' configuration registers, as one
//     bus with an accelerator number (cfg_acc), and the accelerators'
//     interrupt lines (irq).
// Accelerator a is the a-th accelerator tile in row-major order (row 0
// first). The local ports of the CPU and I/O tiles on the two DMA planes are
// idle: nothing is injected there and whatever arrives there is dropped.
//
// The tile counts and the mesh shape follow the evaluated SoC's figure
// (20 tiles: 1 CPU, 1 memory, 1 I/O, 17 accelerators); the positions are
// read off that figure. The coherence and I/O planes of the full platform
// are not built.
module esp_soc
  import noc_pkg::*;
#(
  parameter int unsigned XDIM   = 5,
  parameter int unsigned YDIM   = 4,
  parameter int unsigned DATA_W = 256,
  parameter int unsigned MEM_X  = 0,
  parameter int unsigned MEM_Y  = 0,
  parameter int unsigned CPU_X  = 1,
  parameter int unsigned CPU_Y  = 0,
  parameter int unsigned IO_X   = 1,
  parameter int unsigned IO_Y   = 1,
  localparam int unsigned NT     = XDIM * YDIM,
  localparam int unsigned NACC   = NT - 3,
  localparam int unsigned AIW    = $clog2(NACC),
  localparam int unsigned FLIT_W = DATA_W + PREAMBLE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration bus from the CPU
  input  logic              cfg_we,
  input  logic [AIW-1:0]    cfg_acc,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  output logic [NACC-1:0]   irq,
  // memory tile: request plane, NoC to memory
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [FLIT_W-1:0] mem_req_flit,
  // memory tile: response plane, memory to NoC
  input  logic              mem_rsp_valid,
  output logic              mem_rsp_ready,
  input  logic [FLIT_W-1:0] mem_rsp_flit
);

  localparam int unsigned MEM_T = MEM_Y * XDIM + MEM_X;
  localparam int unsigned CPU_T = CPU_Y * XDIM + CPU_X;
  localparam int unsigned IO_T  = IO_Y * XDIM + IO_X;

  function automatic bit is_acc(int unsigned t);
    return (t != MEM_T) && (t != CPU_T) && (t != IO_T);
  endfunction

  function automatic int unsigned acc_index(int unsigned t);
    int unsigned n;
    n = 0;
    for (int unsigned u = 0; u < t; u++)
      if (is_acc(u)) n++;
    return n;
  endfunction

  logic [NT-1:0]     q_inj_valid, q_inj_ready, q_ej_valid, q_ej_ready;
  logic [FLIT_W-1:0] q_inj_flit [NT];
  logic [FLIT_W-1:0] q_ej_flit  [NT];
  logic [NT-1:0]     p_inj_valid, p_inj_ready, p_ej_valid, p_ej_ready;
  logic [FLIT_W-1:0] p_inj_flit [NT];
  logic [FLIT_W-1:0] p_ej_flit  [NT];

  noc_mesh #(.XDIM(XDIM), .YDIM(YDIM), .DATA_W(DATA_W)) u_req_plane (
    .clk, .rst_n,
    .inj_valid(q_inj_valid), .inj_ready(q_inj_ready), .inj_flit(q_inj_flit),
    .ej_valid (q_ej_valid),  .ej_ready (q_ej_ready),  .ej_flit (q_ej_flit)
  );

  noc_mesh #(.XDIM(XDIM), .YDIM(YDIM), .DATA_W(DATA_W)) u_rsp_plane (
    .clk, .rst_n,
    .inj_valid(p_inj_valid), .inj_ready(p_inj_ready), .inj_flit(p_inj_flit),
    .ej_valid (p_ej_valid),  .ej_ready (p_ej_ready),  .ej_flit (p_ej_flit)
  );

  logic [31:0] acc_rdata [NACC];

  for (genvar t = 0; t < NT; t++) begin : g_tile
    if (is_acc(t)) begin : g_acc
      localparam int unsigned A = acc_index(t);
      acc_tile #(.DATA_W(DATA_W)) u_tile (
        .clk, .rst_n,
        .my_x     (coord_t'(t % XDIM)),
        .my_y     (coord_t'(t / XDIM)),
        .mem_x    (coord_t'(MEM_X)),
        .mem_y    (coord_t'(MEM_Y)),
        .cfg_we   (cfg_we && (cfg_acc == AIW'(A))),
        .cfg_addr,
        .cfg_wdata,
        .cfg_rdata(acc_rdata[A]),
        .irq      (irq[A]),
        .req_out_valid(q_inj_valid[t]), .req_out_ready(q_inj_ready[t]), .req_out_flit(q_inj_flit[t]),
        .req_in_valid (q_ej_valid[t]),  .req_in_ready (q_ej_ready[t]),  .req_in_flit (q_ej_flit[t]),
        .rsp_out_valid(p_inj_valid[t]), .rsp_out_ready(p_inj_ready[t]), .rsp_out_flit(p_inj_flit[t]),
        .rsp_in_valid (p_ej_valid[t]),  .rsp_in_ready (p_ej_ready[t]),  .rsp_in_flit (p_ej_flit[t])
      );
    end else if (t == MEM_T) begin : g_mem
      assign mem_req_valid  = q_ej_valid[t];
      assign mem_req_flit   = q_ej_flit[t];
      assign q_ej_ready[t]  = mem_req_ready;
      assign q_inj_valid[t] = 1'b0;
      assign q_inj_flit[t]  = '0;
      assign p_inj_valid[t] = mem_rsp_valid;
      assign p_inj_flit[t]  = mem_rsp_flit;
      assign mem_rsp_ready  = p_inj_ready[t];
      assign p_ej_ready[t]  = 1'b1;
    end else begin : g_idle
      assign q_inj_valid[t] = 1'b0;
      assign q_inj_flit[t]  = '0;
      assign q_ej_ready[t]  = 1'b1;
      assign p_inj_valid[t] = 1'b0;
      assign p_inj_flit[t]  = '0;
      assign p_ej_ready[t]  = 1'b1;
    end
  end

  assign cfg_rdata = (32'(cfg_acc) < NACC) ? acc_rdata[cfg_acc] : '0;

endmodule
