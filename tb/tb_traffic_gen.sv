// tb_traffic_gen: the traffic generator (64-bit beats, 16-word PLM) with the
// testbench acting as the socket. Data read at index i is f(i); the
// generator must write f(rd_base + k) at wr_base + k for every beat k
// (identity), split 40 beats into bursts of 16, 16 and 8, with the
// configured user fields, and pulse done once at the end. The read and write
// channels stall at random.
module tb_traffic_gen;
  `include "tb_check.svh"
  localparam int DW = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done;
  logic [4:0] src_user, dst_user; logic [31:0] rd_base, wr_base, total_len, burst_len;
  logic [31:0] rd_ctrl_index, rd_ctrl_length, wr_ctrl_index, wr_ctrl_length;
  logic [2:0] rd_ctrl_size, wr_ctrl_size; logic [4:0] rd_ctrl_user, wr_ctrl_user;
  logic rd_ctrl_valid, rd_ctrl_ready, wr_ctrl_valid, wr_ctrl_ready;
  logic [DW-1:0] rd_chnl_data, wr_chnl_data;
  logic rd_chnl_valid, rd_chnl_ready, wr_chnl_valid, wr_chnl_ready;
  int checks = 0, failures = 0;

  traffic_gen #(.DATA_W(DW), .PLM_WORDS(16)) dut (.*);

  function automatic logic [DW-1:0] f(int i);
    return 64'hF00D_0000_0000_0000 | 64'(i * 7 + 3);
  endfunction

  // socket model
  int r_idx = 0, r_left = 0, w_idx = 0, w_left = 0, n_done = 0;
  int rd_lens [$]; int wr_lens [$]; int bad_data = 0, bad_user = 0;
  assign rd_ctrl_ready = (r_left == 0);
  assign wr_ctrl_ready = (w_left == 0);
  always @(negedge clk) begin
    rd_chnl_valid <= (r_left > 0) && ($urandom % 4 != 0);
    wr_chnl_ready <= (w_left > 0) && ($urandom % 4 != 0);
  end
  assign rd_chnl_data = f(r_idx);
  always @(posedge clk) if (rst_n) begin
    if (rd_ctrl_valid && rd_ctrl_ready) begin
      r_idx <= rd_ctrl_index; r_left <= rd_ctrl_length; rd_lens.push_back(rd_ctrl_length);
      if (rd_ctrl_user != 5'd3) bad_user++;
    end else if (rd_chnl_valid && rd_chnl_ready) begin r_idx <= r_idx + 1; r_left <= r_left - 1; end
    if (wr_ctrl_valid && wr_ctrl_ready) begin
      w_idx <= wr_ctrl_index; w_left <= wr_ctrl_length; wr_lens.push_back(wr_ctrl_length);
      if (wr_ctrl_user != 5'd9) bad_user++;
    end else if (wr_chnl_valid && wr_chnl_ready) begin
      if (wr_chnl_data != f(w_idx - 500 + 100)) bad_data++;
      w_idx <= w_idx + 1; w_left <= w_left - 1;
    end
    if (done) n_done++;
  end

  initial begin
    start = 0; src_user = 3; dst_user = 9; rd_base = 100; wr_base = 500; total_len = 40; burst_len = 16;
    rd_chnl_valid = 0; wr_chnl_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    `CHECK(busy, "busy after start")
    while (n_done == 0) @(posedge clk);
    repeat (5) @(posedge clk);
    `CHECK(rd_lens.size() == 3 && wr_lens.size() == 3, "three read and three write bursts")
    if (rd_lens.size() == 3) `CHECK(rd_lens[0] == 16 && rd_lens[1] == 16 && rd_lens[2] == 8, "read burst lengths")
    if (wr_lens.size() == 3) `CHECK(wr_lens[0] == 16 && wr_lens[1] == 16 && wr_lens[2] == 8, "write burst lengths")
    `CHECK(w_idx == 540, "writes cover wr_base .. wr_base + 39")
    `CHECK(bad_data == 0, "written data equal read data (identity)")
    `CHECK(bad_user == 0, "user fields as configured")
    `CHECK(n_done == 1 && !busy, "done pulses once")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("WATCHDOG st=%0d r_left=%0d w_left=%0d rd=%0d wr=%0d", dut.st, r_left, w_left, rd_lens.size(), wr_lens.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
