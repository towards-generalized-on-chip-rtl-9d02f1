// mem_model: behavioural model of the memory tile, for testbenches only.
//
// It sits on the memory tile's local ports of the two DMA planes. From the
// request plane it takes DMA read requests {header, {length, address}} and
// DMA write requests {header, {length, address}, data...}; a read is answered
// on the response plane, after LATENCY idle cycles, with one packet
// {header, data...} addressed to the requesting tile. Memory is a sparse
// array of DATA_W-bit beats indexed by byte address / (DATA_W / 8); unwritten
// beats read as zero. Requests are served one at a time, in order.
// Testbenches preload and inspect memory with poke() and peek().
module mem_model
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W  = 256,
  parameter int unsigned LATENCY = 20,
  parameter int unsigned MY_X    = 0,
  parameter int unsigned MY_Y    = 0,
  localparam int unsigned FLIT_W = DATA_W + PREAMBLE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [FLIT_W-1:0] req_flit,
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output logic [FLIT_W-1:0] rsp_flit
);

  localparam int unsigned BEAT_B = DATA_W / 8;

  logic [DATA_W-1:0] mem [int unsigned];
  int unsigned n_reads, n_writes;

  function automatic void poke(int unsigned beat, logic [DATA_W-1:0] d);
    mem[beat] = d;
  endfunction

  function automatic logic [DATA_W-1:0] peek(int unsigned beat);
    if (mem.exists(beat)) return mem[beat];
    return '0;
  endfunction

  typedef enum logic [2:0] {M_HDR, M_ADDR, M_WDATA, M_WAIT, M_RHDR, M_RDATA} mstate_e;
  mstate_e     st;
  hdr_fixed_t  h;
  msg_e        msg;
  coord_t      sx, sy;
  logic [31:0] cnt, beat;
  int unsigned wait_n;

  assign req_ready = (st == M_HDR) || (st == M_ADDR) || (st == M_WDATA);
  assign rsp_valid = (st == M_RHDR) || (st == M_RDATA);
  assign h         = hdr_fixed_t'(req_flit[HDR_FIXED_W-1:0]);

  always_comb begin
    rsp_flit = '0;
    if (st == M_RHDR) begin
      rsp_flit[FLIT_W-1]                          = 1'b1;
      rsp_flit[HDR_FIXED_W-1:0]                   = {5'd1, 8'd0, MSG_DMA_RSP, coord_t'(MY_Y), coord_t'(MY_X)};
      rsp_flit[HDR_FIXED_W +: DEST_ENTRY_W]       = {1'b1, sy, sx};
    end else begin
      rsp_flit = {1'b0, (cnt == 32'd1), peek(beat)};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_HDR;
      n_reads <= 0;
      n_writes <= 0;
    end else begin
      unique case (st)
        M_HDR: if (req_valid) begin
          msg <= h.msg;
          sx  <= h.src_x;
          sy  <= h.src_y;
          st  <= M_ADDR;
        end
        M_ADDR: if (req_valid) begin
          cnt  <= req_flit[63:32];
          beat <= req_flit[31:0] / BEAT_B;
          if (msg == MSG_DMA_WR_REQ) begin
            st <= M_WDATA;
            n_writes <= n_writes + 1;
          end else begin
            st <= M_WAIT;
            wait_n <= LATENCY;
            n_reads <= n_reads + 1;
          end
        end
        M_WDATA: if (req_valid) begin
          mem[beat] = req_flit[DATA_W-1:0];
          beat <= beat + 1;
          cnt  <= cnt - 1;
          if (cnt == 1) st <= M_HDR;
        end
        M_WAIT: begin
          if (wait_n == 0) st <= M_RHDR;
          else wait_n <= wait_n - 1;
        end
        M_RHDR: if (rsp_ready) st <= M_RDATA;
        M_RDATA: if (rsp_ready) begin
          beat <= beat + 1;
          cnt  <= cnt - 1;
          if (cnt == 1) st <= M_HDR;
        end
        default: st <= M_HDR;
      endcase
    end
  end

endmodule
