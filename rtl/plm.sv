// plm: private local memory of an accelerator.
//
// A simple dual-port RAM of WORDS words of DATA_W bits: one write port and
// one read port, usable in the same cycle. The read is synchronous: the word
// at rd_addr appears on rd_data one clock edge after rd_en. The default,
// 128 words of 256 bits, is 4 KB, the amount of data the evaluated traffic
// generator loads at a time; the port arrangement is this design's choice.
module plm #(
  parameter int unsigned DATA_W = 256,
  parameter int unsigned WORDS  = 4096 * 8 / DATA_W,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [DATA_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [DATA_W-1:0] rd_data
);

  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
