// tlb: address translation in the accelerator socket.
//
// An accelerator sees one contiguous virtual buffer, which may be scattered
// over several large physical pages. The table holds the physical page
// number of each virtual page of that buffer; a virtual byte address is
// translated by replacing its page number with the table entry. The table is
// written through the socket's configuration registers. NPORT independent
// combinational lookups serve the read and the write side of the DMA
// controller; a virtual address past the last entry raises the port's fault
// output.
// Following the design: a per-socket table translating the accelerator's
// virtual buffer into physical pages. This design's choices: 1 MB pages, 16
// entries, 32-bit addresses, a full table of registers rather than a cache
// backed by a page walk.
module tlb #(
  parameter int unsigned ENTRIES   = 16,
  parameter int unsigned PAGE_BITS = 20,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned NPORT     = 2,
  localparam int unsigned IW       = $clog2(ENTRIES),
  localparam int unsigned PPN_W    = ADDR_W - PAGE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [IW-1:0]        wr_idx,
  input  logic [PPN_W-1:0]     wr_ppn,
  input  logic [ADDR_W-1:0]    va    [NPORT],
  output logic [ADDR_W-1:0]    pa    [NPORT],
  output logic [NPORT-1:0]     fault
);

  logic [PPN_W-1:0] ppn [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ppn[i] <= '0;
    end else if (wr_en) begin
      ppn[wr_idx] <= wr_ppn;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      logic [PPN_W-1:0] vpn;
      vpn      = va[p][ADDR_W-1:PAGE_BITS];
      fault[p] = (vpn >= PPN_W'(ENTRIES));
      pa[p]    = {ppn[vpn[IW-1:0]], va[p][PAGE_BITS-1:0]};
    end
  end

endmodule
