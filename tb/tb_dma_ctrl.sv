// tb_dma_ctrl: the socket DMA controller alone (64-bit payload), with the
// testbench standing in for the accelerator, the TLB (pa = va + 1 MB), the
// source table (index k -> tile (k, 2)) and both NoC planes.
//   a. DMA read: request header to the memory tile and {length, address}
//      flit; response data streamed to the read channel, header dropped.
//   b. P2P read from source 3: request to tile (3,2) with the length; the
//      data arrive in two packets and all reach the read channel.
//   c. DMA write: header, {length, address}, data flits, tail on the last.
//   d. Multicast write to 3 consumers with unequal requests (8, 8, 4 beats)
//      for an 8-beat burst: first a 4-beat packet to all three, then, after
//      a new 4-beat request from the third consumer, a second 4-beat packet.
//      The producer must not send before all three requests are in.
module tb_dma_ctrl;
  import noc_pkg::*;
  `include "tb_check.svh"
  localparam int DW = 64, FW = DW + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0] rd_ctrl_index, rd_ctrl_length, wr_ctrl_index, wr_ctrl_length;
  logic [2:0]  rd_ctrl_size, wr_ctrl_size;
  logic [4:0]  rd_ctrl_user, wr_ctrl_user, lut_idx;
  logic rd_ctrl_valid, rd_ctrl_ready, wr_ctrl_valid, wr_ctrl_ready;
  logic [DW-1:0] rd_chnl_data, wr_chnl_data;
  logic rd_chnl_valid, rd_chnl_ready, wr_chnl_valid, wr_chnl_ready;
  logic [31:0] rd_va, rd_pa, wr_va, wr_pa;
  coord_t lut_x, lut_y;
  logic req_out_valid, req_out_ready, req_in_valid, req_in_ready;
  logic rsp_out_valid, rsp_out_ready, rsp_in_valid, rsp_in_ready;
  logic [FW-1:0] req_out_flit, req_in_flit, rsp_out_flit, rsp_in_flit;
  logic rd_busy, wr_busy;
  int checks = 0, failures = 0;

  dma_ctrl #(.DATA_W(DW)) dut (.clk, .rst_n, .my_x(3'd2), .my_y(3'd3), .mem_x(3'd0), .mem_y(3'd0), .*);

  assign rd_pa = rd_va + 32'h0010_0000;
  assign wr_pa = wr_va + 32'h0010_0000;
  assign lut_x = coord_t'(lut_idx);
  assign lut_y = 3'd2;

  // capture of the two output planes
  logic [FW-1:0] reqs [$];
  logic [FW-1:0] rsps [$];
  logic [DW-1:0] rdat [$];
  always @(posedge clk) begin
    if (req_out_valid && req_out_ready) reqs.push_back(req_out_flit);
    if (rsp_out_valid && rsp_out_ready) rsps.push_back(rsp_out_flit);
    if (rd_chnl_valid && rd_chnl_ready) rdat.push_back(rd_chnl_data);
  end
  assign req_out_ready = 1'b1;
  assign rsp_out_ready = 1'b1;
  assign rd_chnl_ready = 1'b1;

  function automatic logic [FW-1:0] hdr(msg_e m, int sx, int sy, int n, int dx [], int dy []);
    logic [FW-1:0] f = '0;
    f[FW-1] = 1'b1;
    f[HDR_FIXED_W-1:0] = {5'(n), 8'd0, m, 3'(sy), 3'(sx)};
    for (int j = 0; j < n; j++) f[HDR_FIXED_W + 7*j +: 7] = {1'b1, 3'(dy[j]), 3'(dx[j])};
    return f;
  endfunction

  task automatic put_rsp(logic [FW-1:0] f);
    @(negedge clk); rsp_in_valid = 1; rsp_in_flit = f;
    do @(posedge clk); while (!rsp_in_ready);
    @(negedge clk); rsp_in_valid = 0;
  endtask
  task automatic put_req(logic [FW-1:0] f);
    @(negedge clk); req_in_valid = 1; req_in_flit = f;
    @(posedge clk);
    @(negedge clk); req_in_valid = 0;
  endtask
  task automatic p2p_req(int cx, int cy, int len);
    put_req(hdr(MSG_P2P_REQ, cx, cy, 1, '{2}, '{3}));
    put_req({2'b01, 32'(len), 32'd0});
  endtask

  task automatic rd(int idx, int len, int user);
    @(negedge clk);
    rd_ctrl_valid = 1; rd_ctrl_index = idx; rd_ctrl_length = len; rd_ctrl_size = 3'b011; rd_ctrl_user = 5'(user);
    do @(posedge clk); while (!rd_ctrl_ready);
    @(negedge clk); rd_ctrl_valid = 0;
  endtask
  task automatic wr(int idx, int len, int user);
    @(negedge clk);
    wr_ctrl_valid = 1; wr_ctrl_index = idx; wr_ctrl_length = len; wr_ctrl_size = 3'b011; wr_ctrl_user = 5'(user);
    do @(posedge clk); while (!wr_ctrl_ready);
    @(negedge clk); wr_ctrl_valid = 0;
  endtask

  // write data source: beats 1000, 1001, ...
  int wbeat = 1000;
  assign wr_chnl_data = DW'(wbeat);
  always @(posedge clk) if (wr_chnl_valid && wr_chnl_ready) wbeat <= wbeat + 1;

  initial begin
    logic [FW-1:0] e;
    rd_ctrl_valid = 0; wr_ctrl_valid = 0; rsp_in_valid = 0; req_in_valid = 0;
    rd_ctrl_index = 0; rd_ctrl_length = 0; rd_ctrl_size = 0; rd_ctrl_user = 0;
    wr_ctrl_index = 0; wr_ctrl_length = 0; wr_ctrl_size = 0; wr_ctrl_user = 0;
    rsp_in_flit = 0; req_in_flit = 0; wr_chnl_valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // ---- a. DMA read
    rd(5, 3, 0);
    repeat (4) @(posedge clk);
    `CHECK(reqs.size() == 2, "DMA read request is two flits")
    if (reqs.size() == 2) begin
      `CHECK(reqs[0] == (hdr(MSG_DMA_RD_REQ, 2, 3, 1, '{0}, '{0}) | (FW'(3) << 11)), "DMA read header")
      `CHECK(reqs[1] == {2'b01, 32'd3, 32'h0010_0000 + 5 * 8}, "length and translated address")
    end
    put_rsp(hdr(MSG_DMA_RSP, 0, 0, 1, '{2}, '{3}));
    for (int i = 0; i < 3; i++) put_rsp({1'b0, i == 2, 64'(700 + i)});
    @(posedge clk);
    `CHECK(rdat.size() == 3 && rdat[0] == 700 && rdat[2] == 702, "read data delivered")
    `CHECK(!rd_busy, "read finished")
    reqs.delete(); rdat.delete();

    // ---- b. P2P read from source 3, data in two packets
    rd(0, 4, 3);
    repeat (4) @(posedge clk);
    `CHECK(reqs.size() == 2 && reqs[0] == (hdr(MSG_P2P_REQ, 2, 3, 1, '{3}, '{2}) | (FW'(3) << 11)), "P2P request to the table's tile")
    if (reqs.size() == 2) `CHECK(reqs[1][63:32] == 4, "P2P request carries the length")
    put_rsp(hdr(MSG_P2P_DATA, 3, 2, 1, '{2}, '{3}));
    put_rsp({2'b00, 64'd1}); put_rsp({2'b01, 64'd2});
    `CHECK(rd_busy, "still waiting for the rest")
    put_rsp(hdr(MSG_P2P_DATA, 3, 2, 1, '{2}, '{3}));
    put_rsp({2'b00, 64'd3}); put_rsp({2'b01, 64'd4});
    @(posedge clk);
    `CHECK(rdat.size() == 4 && rdat[3] == 4 && !rd_busy, "P2P data from two packets")
    reqs.delete();

    // ---- c. DMA write
    wr(16, 4, 0);
    @(negedge clk); wr_chnl_valid = 1;
    repeat (8) @(posedge clk);
    @(negedge clk); wr_chnl_valid = 0;
    `CHECK(reqs.size() == 6, "DMA write is header, address and 4 data flits")
    if (reqs.size() == 6) begin
      `CHECK(reqs[0] == (hdr(MSG_DMA_WR_REQ, 2, 3, 1, '{0}, '{0}) | (FW'(3) << 11)), "DMA write header")
      `CHECK(reqs[1] == {2'b00, 32'd4, 32'h0010_0000 + 16 * 8}, "DMA write address")
      `CHECK(reqs[2] == {2'b00, 64'd1000} && reqs[5] == {2'b01, 64'd1003}, "DMA write data and tail")
    end
    `CHECK(!wr_busy, "write finished")

    // ---- d. multicast to 3 consumers with unequal requests
    wbeat = 2000;
    wr(0, 8, 3);
    @(negedge clk); wr_chnl_valid = 1;
    p2p_req(1, 1, 8);
    p2p_req(2, 2, 8);
    repeat (5) @(posedge clk);
    `CHECK(rsps.size() == 0, "producer waits for all consumer requests")
    p2p_req(3, 3, 4);
    repeat (10) @(posedge clk);
    e = hdr(MSG_P2P_DATA, 2, 3, 3, '{1, 2, 3}, '{1, 2, 3}) | (FW'(3) << 11);
    `CHECK(rsps.size() == 5, "first chunk: header and 4 beats")
    if (rsps.size() >= 5) begin
      `CHECK(rsps[0] == e, "multicast header lists the 3 consumers")
      `CHECK(rsps[1] == {2'b00, 64'd2000} && rsps[4] == {2'b01, 64'd2003}, "first chunk data and tail")
    end
    p2p_req(3, 3, 4);
    repeat (10) @(posedge clk);
    @(negedge clk); wr_chnl_valid = 0;
    `CHECK(rsps.size() == 10, "second chunk: header and 4 beats")
    if (rsps.size() == 10) begin
      `CHECK(rsps[5] == e, "second multicast header")
      `CHECK(rsps[9] == {2'b01, 64'd2007}, "second chunk tail")
    end
    `CHECK(!wr_busy, "multicast burst finished")

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
