// p2p_lut: the socket's table of P2P source tiles.
//
// The read control channel's user field names the source of a transfer: 0 is
// ordinary DMA to memory, 1 .. ENTRIES-1 name another accelerator. This table
// maps each such index to the mesh coordinates of that accelerator's tile,
// so that software can virtualise the indices. It is written through the
// socket's configuration registers (one entry per write, effective at the
// next clock edge) and read combinationally. Entries reset to (0, 0).
// The table and its purpose follow the design; its size (one entry per value
// of the 5-bit user field) and the reset value are this design's choice.
module p2p_lut
  import noc_pkg::*;
#(
  parameter int unsigned ENTRIES = 32,
  localparam int unsigned IW     = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_idx,
  input  coord_t        wr_x,
  input  coord_t        wr_y,
  input  logic [IW-1:0] rd_idx,
  output coord_t        rd_x,
  output coord_t        rd_y
);

  coord_t tx [ENTRIES];
  coord_t ty [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        tx[i] <= '0;
        ty[i] <= '0;
      end
    end else if (wr_en) begin
      tx[wr_idx] <= wr_x;
      ty[wr_idx] <= wr_y;
    end
  end

  assign rd_x = tx[rd_idx];
  assign rd_y = ty[rd_idx];

endmodule
