// idma_engine: tagged DMA issue unit behind the IDMA and CDMA instructions.
//
// An accelerator's control logic starts a transfer with an IDMA command and
// later asks about it with CDMA. IDMA gives direction, length (beats), word
// size, user field (source for reads, number of destinations for writes),
// the virtual index in the accelerator's buffer and the PLM address to fill
// or drain; it is answered, in the cycle it is accepted, with a tag that
// names the transfer. CDMA takes a tag and returns that transfer's status:
// FREE, PENDING or DONE. A CDMA that sees DONE frees the tag.
//
// The unit runs at most one read and one write at a time, each as its own
// small machine: the read machine issues the read control word and then
// writes every beat of the read data channel into the PLM at consecutive
// addresses; the write machine issues the write control word and streams
// consecutive PLM words onto the write data channel. Because the PLM read
// takes one cycle, the write machine reads ahead into a two-word buffer,
// which keeps the channel at one beat per cycle. A new IDMA is refused
// (idma_ready low) while its direction is busy or no tag is free.
//
// Following the design: the two instructions, what IDMA specifies, the tag
// returned by IDMA and the status returned by CDMA, transfers running
// asynchronously to the accelerator. This design's choices: the number of
// tags, the status encoding, freeing a tag on the CDMA that reads DONE, and
// one transfer per direction at a time.
module idma_engine #(
  parameter int unsigned DATA_W  = 256,
  parameter int unsigned PLM_AW  = 7,
  parameter int unsigned NTAGS   = 4,
  localparam int unsigned TW     = $clog2(NTAGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // IDMA
  input  logic              idma_valid,
  output logic              idma_ready,
  input  logic              idma_write,
  input  logic [31:0]       idma_len,
  input  logic [2:0]        idma_size,
  input  logic [4:0]        idma_user,
  input  logic [31:0]       idma_index,
  input  logic [PLM_AW-1:0] idma_plm_addr,
  output logic [TW-1:0]     idma_tag,
  // CDMA
  input  logic              cdma_valid,
  input  logic [TW-1:0]     cdma_tag,
  output logic [1:0]        cdma_status,
  // accelerator interface, four channels
  output logic [31:0]       rd_ctrl_index,
  output logic [31:0]       rd_ctrl_length,
  output logic [2:0]        rd_ctrl_size,
  output logic [4:0]        rd_ctrl_user,
  output logic              rd_ctrl_valid,
  input  logic              rd_ctrl_ready,
  input  logic [DATA_W-1:0] rd_chnl_data,
  input  logic              rd_chnl_valid,
  output logic              rd_chnl_ready,
  output logic [31:0]       wr_ctrl_index,
  output logic [31:0]       wr_ctrl_length,
  output logic [2:0]        wr_ctrl_size,
  output logic [4:0]        wr_ctrl_user,
  output logic              wr_ctrl_valid,
  input  logic              wr_ctrl_ready,
  output logic [DATA_W-1:0] wr_chnl_data,
  output logic              wr_chnl_valid,
  input  logic              wr_chnl_ready,
  // PLM ports
  output logic              plm_wr_en,
  output logic [PLM_AW-1:0] plm_wr_addr,
  output logic [DATA_W-1:0] plm_wr_data,
  output logic              plm_rd_en,
  output logic [PLM_AW-1:0] plm_rd_addr,
  input  logic [DATA_W-1:0] plm_rd_data
);

  localparam logic [1:0] ST_FREE = 2'd0, ST_PENDING = 2'd1, ST_DONE = 2'd2;

  logic [1:0] status [NTAGS];

  // ---------------------------------------------------------- tag issue
  logic [TW-1:0] next_tag;
  logic          have_tag;
  always_comb begin
    next_tag = '0;
    have_tag = 1'b0;
    for (int t = NTAGS - 1; t >= 0; t--)
      if (status[t] == ST_FREE) begin
        next_tag = TW'(t);
        have_tag = 1'b1;
      end
  end

  typedef enum logic [1:0] {X_IDLE, X_CTRL, X_DATA} xstate_e;
  xstate_e rs, ws;

  assign idma_ready  = have_tag && (idma_write ? (ws == X_IDLE) : (rs == X_IDLE));
  assign idma_tag    = next_tag;
  assign cdma_status = status[cdma_tag];

  logic idma_fire;
  assign idma_fire = idma_valid && idma_ready;

  // ------------------------------------------------------- read machine
  logic [TW-1:0]     r_tag;
  logic [31:0]       r_cnt;
  logic [PLM_AW-1:0] r_addr;

  assign rd_ctrl_valid = (rs == X_CTRL);
  assign rd_chnl_ready = (rs == X_DATA);
  assign plm_wr_en     = rd_chnl_valid && rd_chnl_ready;
  assign plm_wr_addr   = r_addr;
  assign plm_wr_data   = rd_chnl_data;

  // ------------------------------------------------------ write machine
  logic [TW-1:0]     w_tag;
  logic [31:0]       w_cnt;     // beats still to send
  logic [31:0]       w_iss;     // PLM reads still to issue
  logic [PLM_AW-1:0] w_addr;
  logic              w_pend;    // a PLM read was issued last cycle
  logic              b_ready, b_valid;
  logic [1:0]        b_room;
  logic [1:0]        b_cnt;

  assign wr_ctrl_valid = (ws == X_CTRL);
  assign wr_chnl_valid = (ws == X_DATA) && b_valid;

  // Read ahead while the buffer plus the read in flight leave room.
  assign b_room      = 2'd2 - b_cnt - 2'(w_pend) + 2'(wr_chnl_valid && wr_chnl_ready);
  assign plm_rd_en   = (ws == X_DATA) && (w_iss != '0) && (b_room != 2'd0);
  assign plm_rd_addr = w_addr;

  noc_fifo #(.WIDTH(DATA_W), .DEPTH(2)) u_buf (
    .clk, .rst_n,
    .in_valid (w_pend),
    .in_ready (b_ready),
    .in_data  (plm_rd_data),
    .out_valid(b_valid),
    .out_ready(wr_chnl_ready && (ws == X_DATA)),
    .out_data (wr_chnl_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_cnt <= '0;
    end else begin
      b_cnt <= b_cnt + 2'(w_pend) - 2'(wr_chnl_valid && wr_chnl_ready);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs             <= X_IDLE;
      ws             <= X_IDLE;
      r_tag          <= '0;
      r_cnt          <= '0;
      r_addr         <= '0;
      w_tag          <= '0;
      w_cnt          <= '0;
      w_iss          <= '0;
      w_addr         <= '0;
      w_pend         <= 1'b0;
      rd_ctrl_index  <= '0;
      rd_ctrl_length <= '0;
      rd_ctrl_size   <= '0;
      rd_ctrl_user   <= '0;
      wr_ctrl_index  <= '0;
      wr_ctrl_length <= '0;
      wr_ctrl_size   <= '0;
      wr_ctrl_user   <= '0;
      for (int t = 0; t < NTAGS; t++) status[t] <= ST_FREE;
    end else begin
      w_pend <= plm_rd_en;
      if (plm_rd_en) begin
        w_addr <= w_addr + 1'b1;
        w_iss  <= w_iss - 1'b1;
      end
      if (cdma_valid && status[cdma_tag] == ST_DONE) status[cdma_tag] <= ST_FREE;
      if (idma_fire) begin
        status[next_tag] <= ST_PENDING;
        if (idma_write) begin
          w_tag          <= next_tag;
          w_cnt          <= idma_len;
          w_iss          <= idma_len;
          w_addr         <= idma_plm_addr;
          wr_ctrl_index  <= idma_index;
          wr_ctrl_length <= idma_len;
          wr_ctrl_size   <= idma_size;
          wr_ctrl_user   <= idma_user;
          ws             <= X_CTRL;
        end else begin
          r_tag          <= next_tag;
          r_cnt          <= idma_len;
          r_addr         <= idma_plm_addr;
          rd_ctrl_index  <= idma_index;
          rd_ctrl_length <= idma_len;
          rd_ctrl_size   <= idma_size;
          rd_ctrl_user   <= idma_user;
          rs             <= X_CTRL;
        end
      end
      // read machine
      if (rs == X_CTRL && rd_ctrl_ready) rs <= X_DATA;
      if (plm_wr_en) begin
        r_addr <= r_addr + 1'b1;
        r_cnt  <= r_cnt - 1'b1;
        if (r_cnt == 32'd1) begin
          rs            <= X_IDLE;
          status[r_tag] <= ST_DONE;
        end
      end
      // write machine
      if (ws == X_CTRL && wr_ctrl_ready) ws <= X_DATA;
      if (wr_chnl_valid && wr_chnl_ready) begin
        w_cnt <= w_cnt - 1'b1;
        if (w_cnt == 32'd1) begin
          ws            <= X_IDLE;
          status[w_tag] <= ST_DONE;
        end
      end
    end
  end

  a_buf_room: assert property (@(posedge clk) disable iff (!rst_n) w_pend |-> b_ready);
  a_len:      assert property (@(posedge clk) disable iff (!rst_n) idma_fire |-> idma_len != '0);

endmodule
