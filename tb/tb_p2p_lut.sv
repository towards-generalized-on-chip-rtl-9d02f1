// tb_p2p_lut: fills the source table with random coordinates and reads every
// entry back; checks that a write takes effect at the next clock edge and
// that other entries are unchanged.
module tb_p2p_lut;
  import noc_pkg::*;
  `include "tb_check.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [4:0] wr_idx, rd_idx; coord_t wr_x, wr_y, rd_x, rd_y;
  coord_t mx [32]; coord_t my [32];
  int checks = 0, failures = 0;
  p2p_lut dut (.*);
  initial begin
    wr_en = 0; wr_idx = 0; rd_idx = 0; wr_x = 0; wr_y = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); rd_idx = 5'(i); #1;
      `CHECK(rd_x == 0 && rd_y == 0, "reset value")
    end
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < 32; i++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 5'(i); wr_x = 3'($urandom); wr_y = 3'($urandom);
        mx[i] = wr_x; my[i] = wr_y;
        @(negedge clk); wr_en = 0;
      end
    for (int i = 0; i < 32; i++) begin
      rd_idx = 5'(i); #1;
      `CHECK(rd_x == mx[i] && rd_y == my[i], "entry read back")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
