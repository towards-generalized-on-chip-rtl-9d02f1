// tb_tlb: loads a random page table and translates random virtual addresses
// on both ports; the expected physical address is computed from the table
// copy: page number replaced, 20-bit page offset kept. Also checks the fault
// flag past the last entry.
module tb_tlb;
  `include "tb_check.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [3:0] wr_idx; logic [11:0] wr_ppn;
  logic [31:0] va [2]; logic [31:0] pa [2]; logic [1:0] fault;
  logic [11:0] table_copy [16];
  int checks = 0, failures = 0;
  tlb dut (.*);
  initial begin
    wr_en = 0; wr_idx = 0; wr_ppn = 0; va[0] = 0; va[1] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); wr_en = 1; wr_idx = 4'(i); wr_ppn = 12'($urandom); table_copy[i] = wr_ppn;
    end
    @(negedge clk); wr_en = 0;
    for (int k = 0; k < 500; k++) begin
      int unsigned a0, a1;
      a0 = $urandom % (16 << 20); a1 = $urandom % (16 << 20);
      va[0] = a0; va[1] = a1; #1;
      `CHECK(pa[0] == {table_copy[a0 >> 20], a0[19:0]}, "port 0 translation")
      `CHECK(pa[1] == {table_copy[a1 >> 20], a1[19:0]}, "port 1 translation")
      `CHECK(fault == 2'b00, "no fault inside the table")
    end
    va[0] = 32'h0100_0000; va[1] = 32'h00F0_0000; #1;
    `CHECK(fault == 2'b01, "fault past the last entry")
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
