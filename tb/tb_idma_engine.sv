// tb_idma_engine: the IDMA/CDMA unit with a PLM (64-bit words).
//   1. IDMA read of 6 beats into PLM address 10 with user 7: the read control
//      word carries the command's fields; CDMA shows PENDING, then DONE; the
//      CDMA that reads DONE frees the tag.
//   2. IDMA write of the same 6 words with user 2: the write channel carries
//      them in order and, with the channel always ready, at one beat per
//      cycle (6 beats in 6 consecutive cycles).
//   3. Tags: a new IDMA while an earlier tag is DONE but not yet checked gets
//      a different tag.
module tb_idma_engine;
  `include "tb_check.svh"
  localparam int DW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic idma_valid, idma_ready, idma_write, cdma_valid;
  logic [31:0] idma_len, idma_index; logic [2:0] idma_size; logic [4:0] idma_user;
  logic [6:0] idma_plm_addr; logic [1:0] idma_tag, cdma_tag; logic [1:0] cdma_status;
  logic [31:0] rd_ctrl_index, rd_ctrl_length, wr_ctrl_index, wr_ctrl_length;
  logic [2:0] rd_ctrl_size, wr_ctrl_size; logic [4:0] rd_ctrl_user, wr_ctrl_user;
  logic rd_ctrl_valid, rd_ctrl_ready, wr_ctrl_valid, wr_ctrl_ready;
  logic [DW-1:0] rd_chnl_data, wr_chnl_data;
  logic rd_chnl_valid, rd_chnl_ready, wr_chnl_valid, wr_chnl_ready;
  logic plm_wr_en, plm_rd_en; logic [6:0] plm_wr_addr, plm_rd_addr; logic [DW-1:0] plm_wr_data, plm_rd_data;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;

  idma_engine #(.DATA_W(DW)) dut (.*);
  plm #(.DATA_W(DW), .WORDS(128)) u_plm (.clk, .wr_en(plm_wr_en), .wr_addr(plm_wr_addr), .wr_data(plm_wr_data),
                                        .rd_en(plm_rd_en), .rd_addr(plm_rd_addr), .rd_data(plm_rd_data));

  logic [DW-1:0] wout [$]; int wcyc [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (wr_chnl_valid && wr_chnl_ready) begin wout.push_back(wr_chnl_data); wcyc.push_back(cyc); end
  end

  task automatic idma(bit w, int len, int user, int idx, int pa, output logic [1:0] tag);
    @(negedge clk);
    idma_valid = 1; idma_write = w; idma_len = len; idma_user = 5'(user); idma_index = idx; idma_plm_addr = 7'(pa);
    idma_size = 3'b011;
    while (!idma_ready) @(negedge clk);
    tag = idma_tag;
    @(posedge clk); @(negedge clk); idma_valid = 0;
  endtask
  function automatic logic [1:0] cdma(logic [1:0] t);
    cdma_tag = t;
    return cdma_status;
  endfunction

  initial begin
    logic [1:0] t1, t2, t3;
    idma_valid = 0; cdma_valid = 0; cdma_tag = 0; idma_write = 0; idma_len = 0; idma_user = 0;
    idma_index = 0; idma_plm_addr = 0; idma_size = 0;
    rd_ctrl_ready = 0; rd_chnl_valid = 0; rd_chnl_data = 0; wr_ctrl_ready = 0; wr_chnl_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // ---- 1. read
    idma(0, 6, 7, 40, 10, t1);
    `CHECK(rd_ctrl_valid && rd_ctrl_index == 40 && rd_ctrl_length == 6 && rd_ctrl_user == 7, "read control word")
    #1 `CHECK(cdma(t1) == 2'd1, "PENDING while the read runs")
    @(negedge clk); rd_ctrl_ready = 1; @(negedge clk); rd_ctrl_ready = 0;
    for (int i = 0; i < 6; i++) begin
      @(negedge clk); rd_chnl_valid = 1; rd_chnl_data = 64'hA000 + i;
      @(posedge clk); while (!rd_chnl_ready) @(posedge clk);
    end
    @(negedge clk); rd_chnl_valid = 0;
    #1 `CHECK(cdma(t1) == 2'd2, "DONE after the last beat")
    cdma_valid = 1; @(negedge clk); cdma_valid = 0; #1;
    `CHECK(cdma(t1) == 2'd0, "tag freed by the CDMA that saw DONE")

    // ---- 2. write the PLM words back
    wr_chnl_ready = 1;
    idma(1, 6, 2, 80, 10, t3);
    `CHECK(wr_ctrl_valid && wr_ctrl_index == 80 && wr_ctrl_length == 6 && wr_ctrl_user == 2, "write control word")
    @(negedge clk); wr_ctrl_ready = 1; @(negedge clk); wr_ctrl_ready = 0;
    repeat (12) @(posedge clk);
    `CHECK(wout.size() == 6, "six beats written")
    if (wout.size() == 6) begin
      for (int i = 0; i < 6; i++) `CHECK(wout[i] == 64'hA000 + i, "write data from the PLM in order")
      `CHECK(wcyc[5] - wcyc[0] == 5, "one beat per cycle")
    end
    #1 `CHECK(cdma(t3) == 2'd2, "write DONE")
    idma(0, 1, 0, 0, 0, t2);
    `CHECK(t2 != t3, "a new transfer does not reuse a tag that is not yet freed")
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
