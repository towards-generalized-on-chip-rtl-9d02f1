// dma_ctrl: the accelerator socket's DMA controller with flexible P2P and
// multicast.
//
// The accelerator drives four independent valid/ready channels: read
// control, read data, write control and write data. Each control word
// carries index (position in the accelerator's virtual buffer, counted in
// data beats), length (in beats), word size and a 5-bit user field that
// selects the communication mode per burst:
//   read  user = 0      DMA read from memory
//   read  user = k > 0  P2P read from the accelerator whose tile the source
//                       table (p2p_lut) lists under index k
//   write user = 0      DMA write to memory
//   write user = 1      unicast P2P: the data go to one consumer
//   write user = n > 1  multicast: the data go to n consumers in one packet
//
// The controller uses two NoC planes. The request plane carries DMA read and
// write requests to the memory tile and P2P requests from a consumer to a
// producer; the response plane carries DMA read data and P2P data.
//
// Reads. One read burst is served at a time. The controller sends a two-flit
// request, {header, {length, address}}, to memory or, for P2P, to the
// producer, and then streams the data flits of the answering packets to the
// read data channel until `length` beats have arrived. Header flits are
// dropped. P2P data may arrive in several packets.
//
// P2P is pull-based: a producer sends nothing until a consumer asks. Every
// P2P request that reaches the tile is accepted at once into a request queue
// (so messages put on the NoC are always consumed) holding the consumer's
// coordinates and the number of beats it asked for. A P2P write burst of
// n destinations waits until n consumer slots hold an open request, then
// sends a packet to all n slots' tiles with chunk = min(beats left in the
// burst, beats still owed to each slot) data flits, subtracts the chunk from
// every slot, and repeats until the burst is done. A slot with beats still
// owed carries over to the next burst. So producer and consumer may split
// the same total amount of data into bursts of different sizes.
//
// DMA writes send {header, {length, address}, data...} on the request plane.
// Addresses are translated by the socket's TLB; bursts must not cross a page.
//
// Following the design: the user-field encoding, the per-burst choice of
// mode, the consumer-supplied length in each P2P request, a producer waiting
// for the given number of consumer requests and then sending one multicast
// packet with all destinations, pull-based P2P on the DMA planes. This
// design's own choices: message formats (see noc_pkg), which plane carries
// which message, one read and one write burst in flight, request queue depth,
// splitting into chunks at the smallest open request, and no write
// acknowledgement from memory.
module dma_ctrl
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W   = 256,
  parameter int unsigned MAX_DEST = dests_for_width(DATA_W),
  parameter int unsigned REQ_QD   = 16,
  localparam int unsigned FLIT_W  = DATA_W + PREAMBLE_W,
  localparam int unsigned BEAT_B  = DATA_W / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  coord_t            my_x,
  input  coord_t            my_y,
  input  coord_t            mem_x,
  input  coord_t            mem_y,
  // accelerator: read control
  input  logic [31:0]       rd_ctrl_index,
  input  logic [31:0]       rd_ctrl_length,
  input  logic [2:0]        rd_ctrl_size,
  input  logic [4:0]        rd_ctrl_user,
  input  logic              rd_ctrl_valid,
  output logic              rd_ctrl_ready,
  // accelerator: read data
  output logic [DATA_W-1:0] rd_chnl_data,
  output logic              rd_chnl_valid,
  input  logic              rd_chnl_ready,
  // accelerator: write control
  input  logic [31:0]       wr_ctrl_index,
  input  logic [31:0]       wr_ctrl_length,
  input  logic [2:0]        wr_ctrl_size,
  input  logic [4:0]        wr_ctrl_user,
  input  logic              wr_ctrl_valid,
  output logic              wr_ctrl_ready,
  // accelerator: write data
  input  logic [DATA_W-1:0] wr_chnl_data,
  input  logic              wr_chnl_valid,
  output logic              wr_chnl_ready,
  // TLB lookups (byte addresses)
  output logic [31:0]       rd_va,
  input  logic [31:0]       rd_pa,
  output logic [31:0]       wr_va,
  input  logic [31:0]       wr_pa,
  // P2P source table lookup
  output logic [4:0]        lut_idx,
  input  coord_t            lut_x,
  input  coord_t            lut_y,
  // request plane
  output logic              req_out_valid,
  input  logic              req_out_ready,
  output logic [FLIT_W-1:0] req_out_flit,
  input  logic              req_in_valid,
  output logic              req_in_ready,
  input  logic [FLIT_W-1:0] req_in_flit,
  // response plane
  output logic              rsp_out_valid,
  input  logic              rsp_out_ready,
  output logic [FLIT_W-1:0] rsp_out_flit,
  input  logic              rsp_in_valid,
  output logic              rsp_in_ready,
  input  logic [FLIT_W-1:0] rsp_in_flit,
  // status
  output logic              rd_busy,
  output logic              wr_busy
);

  localparam int unsigned SW = $clog2(MAX_DEST + 1);

  // Header flit with one destination.
  function automatic logic [FLIT_W-1:0] mk_hdr1(msg_e m, coord_t sx, coord_t sy,
                                                coord_t dx, coord_t dy, logic [2:0] size);
    logic [FLIT_W-1:0] f;
    hdr_fixed_t h;
    dest_t d;
    f = '0;
    h = '{ndest: 5'd1, rsv: {5'd0, size}, msg: m, src_y: sy, src_x: sx};
    d = '{valid: 1'b1, y: dy, x: dx};
    f[FLIT_W-1]                 = 1'b1;
    f[HDR_FIXED_W-1:0]          = h;
    f[HDR_FIXED_W +: DEST_ENTRY_W] = d;
    return f;
  endfunction

  // ================================================================== reads
  typedef enum logic [1:0] {R_IDLE, R_HDR, R_ADDR, R_DATA} rstate_e;
  rstate_e     rs;
  logic [31:0] r_index, r_len, r_cnt;
  logic [2:0]  r_size;
  logic [4:0]  r_user;

  assign rd_ctrl_ready = (rs == R_IDLE);
  assign rd_va         = r_index * BEAT_B;
  assign lut_idx       = r_user;
  assign rd_busy       = (rs != R_IDLE);

  // ================================================================= writes
  typedef enum logic [2:0] {W_IDLE, W_DHDR, W_DADDR, W_DDATA, W_PWAIT, W_PHDR, W_PDATA} wstate_e;
  wstate_e     ws;
  logic [31:0] w_index, w_len, w_left, w_cnt, w_chunk;
  logic [2:0]  w_size;
  logic [4:0]  w_user;

  assign wr_ctrl_ready = (ws == W_IDLE);
  assign wr_va         = w_index * BEAT_B;
  assign wr_busy       = (ws != W_IDLE);

  // ------------------------------------------------- request plane output
  // Read side and DMA-write side share the port; a packet keeps it to its tail.
  typedef enum logic [1:0] {O_NONE, O_RD, O_WR} owner_e;
  owner_e      own, own_q;
  logic        r_want, w_want;
  logic [FLIT_W-1:0] r_flit, w_flit;
  logic        r_flit_v, w_flit_v;

  assign r_want = (rs == R_HDR) || (rs == R_ADDR);
  assign w_want = (ws == W_DHDR) || (ws == W_DADDR) || (ws == W_DDATA);

  always_comb begin
    own = own_q;
    if (own_q == O_NONE) begin
      if (r_want)      own = O_RD;
      else if (w_want) own = O_WR;
    end
  end

  always_comb begin
    r_flit   = '0;
    r_flit_v = 1'b0;
    if (rs == R_HDR) begin
      r_flit_v = 1'b1;
      r_flit   = (r_user == '0) ? mk_hdr1(MSG_DMA_RD_REQ, my_x, my_y, mem_x, mem_y, r_size)
                                : mk_hdr1(MSG_P2P_REQ,    my_x, my_y, lut_x, lut_y, r_size);
    end else if (rs == R_ADDR) begin
      r_flit_v        = 1'b1;
      r_flit[FLIT_W-2] = 1'b1;
      r_flit[63:0]    = {r_len, (r_user == '0) ? rd_pa : 32'd0};
    end
  end

  always_comb begin
    w_flit   = '0;
    w_flit_v = 1'b0;
    unique case (ws)
      W_DHDR: begin
        w_flit_v = 1'b1;
        w_flit   = mk_hdr1(MSG_DMA_WR_REQ, my_x, my_y, mem_x, mem_y, w_size);
      end
      W_DADDR: begin
        w_flit_v     = 1'b1;
        w_flit[63:0] = {w_len, wr_pa};
      end
      W_DDATA: begin
        w_flit_v = wr_chnl_valid;
        w_flit   = {1'b0, (w_cnt == 32'd1), wr_chnl_data};
      end
      default: ;
    endcase
  end

  assign req_out_valid = (own == O_RD) ? r_flit_v : (own == O_WR) ? w_flit_v : 1'b0;
  assign req_out_flit  = (own == O_RD) ? r_flit   : w_flit;

  logic req_fire;
  assign req_fire = req_out_valid && req_out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) own_q <= O_NONE;
    else if (req_fire && req_out_flit[FLIT_W-2]) own_q <= O_NONE;
    else own_q <= own;
  end

  // -------------------------------------------------------- read machine
  assign rd_chnl_data  = rsp_in_flit[DATA_W-1:0];
  assign rd_chnl_valid = (rs == R_DATA) && rsp_in_valid && !rsp_in_flit[FLIT_W-1];
  assign rsp_in_ready  = (rs == R_DATA) && (rsp_in_flit[FLIT_W-1] || rd_chnl_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs      <= R_IDLE;
      r_index <= '0;
      r_len   <= '0;
      r_cnt   <= '0;
      r_size  <= '0;
      r_user  <= '0;
    end else begin
      unique case (rs)
        R_IDLE: if (rd_ctrl_valid) begin
          r_index <= rd_ctrl_index;
          r_len   <= rd_ctrl_length;
          r_cnt   <= rd_ctrl_length;
          r_size  <= rd_ctrl_size;
          r_user  <= rd_ctrl_user;
          rs      <= R_HDR;
        end
        R_HDR:  if (own == O_RD && req_out_ready) rs <= R_ADDR;
        R_ADDR: if (own == O_RD && req_out_ready) rs <= R_DATA;
        R_DATA: if (rd_chnl_valid && rd_chnl_ready) begin
          r_cnt <= r_cnt - 1'b1;
          if (r_cnt == 32'd1) rs <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  // --------------------------------------------- incoming P2P requests
  // Two-flit packets {header, {length}}; the header gives the consumer tile.
  coord_t      q_sx, q_sy;
  hdr_fixed_t  in_hdr;
  logic        q_push;
  logic [37:0] q_in, q_out;
  logic        q_in_ready, q_valid, q_pop;

  assign in_hdr       = hdr_fixed_t'(req_in_flit[HDR_FIXED_W-1:0]);
  assign q_push       = req_in_valid && !req_in_flit[FLIT_W-1];
  assign q_in         = {q_sx, q_sy, req_in_flit[63:32]};
  assign req_in_ready = req_in_flit[FLIT_W-1] || q_in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_sx <= '0;
      q_sy <= '0;
    end else if (req_in_valid && req_in_flit[FLIT_W-1]) begin
      q_sx <= in_hdr.src_x;
      q_sy <= in_hdr.src_y;
    end
  end

  noc_fifo #(.WIDTH(38), .DEPTH(REQ_QD)) u_reqq (
    .clk, .rst_n,
    .in_valid (q_push),
    .in_ready (q_in_ready),
    .in_data  (q_in),
    .out_valid(q_valid),
    .out_ready(q_pop),
    .out_data (q_out)
  );

  // ------------------------------------------------ consumer slots
  coord_t      s_x   [MAX_DEST];
  coord_t      s_y   [MAX_DEST];
  logic [31:0] s_rem [MAX_DEST];
  logic [SW-1:0] ndst;
  logic [MAX_DEST-1:0] s_need;     // slot in use by this burst with nothing owed yet
  logic        all_open;
  logic [31:0] min_rem;
  int unsigned fill_k;

  assign ndst = (w_user > 5'(MAX_DEST)) ? SW'(MAX_DEST) : SW'(w_user);

  always_comb begin
    s_need  = '0;
    min_rem = w_left;
    fill_k  = 0;
    for (int k = MAX_DEST - 1; k >= 0; k--) begin
      if (k < int'(ndst)) begin
        if (s_rem[k] == '0) begin
          s_need[k] = 1'b1;
          fill_k    = k;
        end else if (s_rem[k] < min_rem) begin
          min_rem = s_rem[k];
        end
      end
    end
    all_open = (s_need == '0);
  end

  assign q_pop = (ws == W_PWAIT) && !all_open && q_valid;

  // Multicast header with the first ndst slots as destinations.
  logic [FLIT_W-1:0] p_hdr;
  always_comb begin
    hdr_fixed_t h;
    p_hdr = '0;
    h = '{ndest: 5'(ndst), rsv: {5'd0, w_size}, msg: MSG_P2P_DATA, src_y: my_y, src_x: my_x};
    p_hdr[FLIT_W-1]        = 1'b1;
    p_hdr[HDR_FIXED_W-1:0] = h;
    for (int k = 0; k < MAX_DEST; k++)
      if (k < int'(ndst))
        p_hdr[HDR_FIXED_W + k*DEST_ENTRY_W +: DEST_ENTRY_W] = {1'b1, s_y[k], s_x[k]};
  end

  assign rsp_out_valid = (ws == W_PHDR) || ((ws == W_PDATA) && wr_chnl_valid);
  assign rsp_out_flit  = (ws == W_PHDR) ? p_hdr : {1'b0, (w_cnt == 32'd1), wr_chnl_data};

  assign wr_chnl_ready = ((ws == W_DDATA) && own == O_WR && req_out_ready) ||
                         ((ws == W_PDATA) && rsp_out_ready);

  // -------------------------------------------------------- write machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws      <= W_IDLE;
      w_index <= '0;
      w_len   <= '0;
      w_left  <= '0;
      w_cnt   <= '0;
      w_chunk <= '0;
      w_size  <= '0;
      w_user  <= '0;
      for (int k = 0; k < MAX_DEST; k++) begin
        s_x[k]   <= '0;
        s_y[k]   <= '0;
        s_rem[k] <= '0;
      end
    end else begin
      unique case (ws)
        W_IDLE: if (wr_ctrl_valid) begin
          w_index <= wr_ctrl_index;
          w_len   <= wr_ctrl_length;
          w_left  <= wr_ctrl_length;
          w_cnt   <= wr_ctrl_length;
          w_size  <= wr_ctrl_size;
          w_user  <= wr_ctrl_user;
          ws      <= (wr_ctrl_user == '0) ? W_DHDR : W_PWAIT;
        end
        W_DHDR:  if (own == O_WR && req_out_ready) ws <= W_DADDR;
        W_DADDR: if (own == O_WR && req_out_ready) ws <= W_DDATA;
        W_DDATA: if (wr_chnl_valid && wr_chnl_ready) begin
          w_cnt <= w_cnt - 1'b1;
          if (w_cnt == 32'd1) ws <= W_IDLE;
        end
        W_PWAIT: begin
          if (all_open) begin
            w_chunk <= min_rem;
            w_cnt   <= min_rem;
            ws      <= W_PHDR;
          end else if (q_valid) begin
            s_y[fill_k]   <= q_out[34:32];
            s_x[fill_k]   <= q_out[37:35];
            s_rem[fill_k] <= q_out[31:0];
          end
        end
        W_PHDR: if (rsp_out_ready) ws <= W_PDATA;
        W_PDATA: if (wr_chnl_valid && wr_chnl_ready) begin
          w_cnt <= w_cnt - 1'b1;
          if (w_cnt == 32'd1) begin
            for (int k = 0; k < MAX_DEST; k++)
              if (k < int'(ndst)) s_rem[k] <= s_rem[k] - w_chunk;
            w_left <= w_left - w_chunk;
            ws     <= (w_left == w_chunk) ? W_IDLE : W_PWAIT;
          end
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  // ----------------------------------------------------------- assertions
  a_rd_len:   assert property (@(posedge clk) disable iff (!rst_n)
                (rd_ctrl_valid && rd_ctrl_ready) |-> rd_ctrl_length != '0);
  a_wr_len:   assert property (@(posedge clk) disable iff (!rst_n)
                (wr_ctrl_valid && wr_ctrl_ready) |-> wr_ctrl_length != '0);
  a_ndest:    assert property (@(posedge clk) disable iff (!rst_n)
                (wr_ctrl_valid && wr_ctrl_ready) |-> wr_ctrl_user <= 5'(MAX_DEST));
  // P2P requests are always consumed (consumption assumption).
  a_consume:  assert property (@(posedge clk) disable iff (!rst_n)
                req_in_valid |-> req_in_ready);
  a_rd_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                (rd_ctrl_valid && !rd_ctrl_ready) |=> rd_ctrl_valid);

endmodule
