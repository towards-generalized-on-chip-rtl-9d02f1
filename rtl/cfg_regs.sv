// cfg_regs: configuration registers and interrupt of the accelerator socket.
//
// Software (the CPU, over the SoC's I/O path) writes one 32-bit register per
// cycle through cfg_we/cfg_addr/cfg_wdata and reads them combinationally on
// cfg_rdata. Register map (word addresses):
//   0x00 CMD        write: bit 0 starts the accelerator and clears the IRQ
//   0x01 STATUS     read:  bit 0 IRQ pending (invocation done), bit 1 busy
//   0x02 SRC_USER   read control user field of the accelerator's reads
//   0x03 DST_USER   write control user field of its writes
//   0x04 RD_BASE    first read index (beats)
//   0x05 WR_BASE    first write index (beats)
//   0x06 TOTAL_LEN  beats to move
//   0x07 BURST_LEN  beats per burst
//   0x20-0x3F       P2P source table entry (addr - 0x20): bits [2:0] x, [5:3] y
//   0x40-0x4F       TLB entry (addr - 0x40): physical page number
// The table and TLB writes are forwarded to p2p_lut and tlb. irq rises on
// the accelerator's done pulse and stays high until the next start.
// Configuration registers and an interrupt are services of the socket in the
// design; the register map and the level interrupt are this design's choice.
module cfg_regs #(
  parameter int unsigned PPN_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [7:0]       cfg_addr,
  input  logic [31:0]      cfg_wdata,
  output logic [31:0]      cfg_rdata,
  // accelerator configuration
  output logic             start,
  output logic [4:0]       src_user,
  output logic [4:0]       dst_user,
  output logic [31:0]      rd_base,
  output logic [31:0]      wr_base,
  output logic [31:0]      total_len,
  output logic [31:0]      burst_len,
  input  logic             acc_busy,
  input  logic             acc_done,
  output logic             irq,
  // table writes
  output logic             lut_we,
  output logic [4:0]       lut_idx,
  output logic [2:0]       lut_x,
  output logic [2:0]       lut_y,
  output logic             tlb_we,
  output logic [3:0]       tlb_idx,
  output logic [PPN_W-1:0] tlb_ppn
);

  assign start   = cfg_we && (cfg_addr == 8'h00) && cfg_wdata[0];
  assign lut_we  = cfg_we && (cfg_addr[7:5] == 3'b001);
  assign lut_idx = cfg_addr[4:0];
  assign lut_x   = cfg_wdata[2:0];
  assign lut_y   = cfg_wdata[5:3];
  assign tlb_we  = cfg_we && (cfg_addr[7:4] == 4'h4);
  assign tlb_idx = cfg_addr[3:0];
  assign tlb_ppn = cfg_wdata[PPN_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_user  <= '0;
      dst_user  <= '0;
      rd_base   <= '0;
      wr_base   <= '0;
      total_len <= '0;
      burst_len <= '0;
      irq       <= 1'b0;
    end else begin
      if (start)         irq <= 1'b0;
      else if (acc_done) irq <= 1'b1;
      if (cfg_we) begin
        unique case (cfg_addr)
          8'h02: src_user  <= cfg_wdata[4:0];
          8'h03: dst_user  <= cfg_wdata[4:0];
          8'h04: rd_base   <= cfg_wdata;
          8'h05: wr_base   <= cfg_wdata;
          8'h06: total_len <= cfg_wdata;
          8'h07: burst_len <= cfg_wdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (cfg_addr)
      8'h01:   cfg_rdata = {30'd0, acc_busy, irq};
      8'h02:   cfg_rdata = {27'd0, src_user};
      8'h03:   cfg_rdata = {27'd0, dst_user};
      8'h04:   cfg_rdata = rd_base;
      8'h05:   cfg_rdata = wr_base;
      8'h06:   cfg_rdata = total_len;
      8'h07:   cfg_rdata = burst_len;
      default: cfg_rdata = '0;
    endcase
  end

endmodule
