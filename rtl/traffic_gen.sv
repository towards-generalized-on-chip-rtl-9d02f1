// traffic_gen: traffic-generator accelerator.
//
// It mimics the communication of a real accelerator without computing: it
// writes out exactly the data it reads in (the identity function). After a
// start pulse it moves total_len beats in bursts of at most burst_len beats,
// which must fit its private local memory (4 KB by default). For each burst
// it issues an IDMA read of the burst into the PLM, polls with CDMA until
// that read is done, issues an IDMA write of the same PLM words, and polls
// until the write is done. Reads use index rd_base + offset and the user
// field src_user (0 = memory, k = P2P from source k); writes use
// wr_base + offset and dst_user (0 = memory, 1 = unicast P2P, n = multicast
// to n consumers). When the last burst is written, done pulses for one cycle.
//
// Following the design: identity function, 4 KB loaded at a time, larger
// data sets split into several read and write bursts, communication modes
// chosen per burst. This design's choices: it drives its transfers through
// the IDMA/CDMA unit (idma_engine), and it handles one burst at a time
// (read, then write) with a single PLM buffer.
module traffic_gen #(
  parameter int unsigned DATA_W    = 256,
  parameter int unsigned PLM_WORDS = 4096 * 8 / DATA_W,
  localparam int unsigned PLM_AW   = $clog2(PLM_WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              start,
  input  logic [4:0]        src_user,
  input  logic [4:0]        dst_user,
  input  logic [31:0]       rd_base,
  input  logic [31:0]       wr_base,
  input  logic [31:0]       total_len,
  input  logic [31:0]       burst_len,
  output logic              busy,
  output logic              done,
  // accelerator interface
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
  input  logic              wr_chnl_ready
);

  localparam int unsigned NTAGS = 4;
  localparam int unsigned TW    = $clog2(NTAGS);
  // Word size code of a full beat: 3'b011 is 64 bits; wider beats use the
  // largest code the 3-bit field offers.
  localparam logic [2:0] SIZE = (DATA_W >= 64) ? 3'b011 : 3'b010;

  typedef enum logic [2:0] {T_IDLE, T_RD, T_RD_WAIT, T_WR, T_WR_WAIT} tstate_e;
  tstate_e       st;
  logic [31:0]   off, left, chunk;
  logic [TW-1:0] tag;

  logic              idma_valid, idma_ready, idma_write;
  logic [TW-1:0]     idma_tag;
  logic [1:0]        cdma_status;
  logic              plm_wr_en, plm_rd_en;
  logic [PLM_AW-1:0] plm_wr_addr, plm_rd_addr;
  logic [DATA_W-1:0] plm_wr_data, plm_rd_data;

  assign chunk      = (left < burst_len) ? left : burst_len;
  assign idma_valid = (st == T_RD) || (st == T_WR);
  assign idma_write = (st == T_WR);
  assign busy       = (st != T_IDLE);

  idma_engine #(.DATA_W(DATA_W), .PLM_AW(PLM_AW), .NTAGS(NTAGS)) u_idma (
    .clk, .rst_n,
    .idma_valid, .idma_ready, .idma_write,
    .idma_len     (chunk),
    .idma_size    (SIZE),
    .idma_user    (idma_write ? dst_user : src_user),
    .idma_index   ((idma_write ? wr_base : rd_base) + off),
    .idma_plm_addr('0),
    .idma_tag,
    .cdma_valid   ((st == T_RD_WAIT) || (st == T_WR_WAIT)),
    .cdma_tag     (tag),
    .cdma_status,
    .rd_ctrl_index, .rd_ctrl_length, .rd_ctrl_size, .rd_ctrl_user, .rd_ctrl_valid, .rd_ctrl_ready,
    .rd_chnl_data, .rd_chnl_valid, .rd_chnl_ready,
    .wr_ctrl_index, .wr_ctrl_length, .wr_ctrl_size, .wr_ctrl_user, .wr_ctrl_valid, .wr_ctrl_ready,
    .wr_chnl_data, .wr_chnl_valid, .wr_chnl_ready,
    .plm_wr_en, .plm_wr_addr, .plm_wr_data,
    .plm_rd_en, .plm_rd_addr, .plm_rd_data
  );

  plm #(.DATA_W(DATA_W), .WORDS(PLM_WORDS)) u_plm (
    .clk,
    .wr_en  (plm_wr_en),
    .wr_addr(plm_wr_addr),
    .wr_data(plm_wr_data),
    .rd_en  (plm_rd_en),
    .rd_addr(plm_rd_addr),
    .rd_data(plm_rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= T_IDLE;
      off  <= '0;
      left <= '0;
      tag  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        T_IDLE: if (start) begin
          off  <= '0;
          left <= total_len;
          st   <= (total_len == '0) ? T_IDLE : T_RD;
        end
        T_RD: if (idma_ready) begin
          tag <= idma_tag;
          st  <= T_RD_WAIT;
        end
        T_RD_WAIT: if (cdma_status == 2'd2) st <= T_WR;
        T_WR: if (idma_ready) begin
          tag <= idma_tag;
          st  <= T_WR_WAIT;
        end
        T_WR_WAIT: if (cdma_status == 2'd2) begin
          off  <= off + chunk;
          left <= left - chunk;
          if (left == chunk) begin
            st   <= T_IDLE;
            done <= 1'b1;
          end else begin
            st <= T_RD;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  a_burst_fits: assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_IDLE && start) |-> (burst_len != '0 && burst_len <= PLM_WORDS));

endmodule
