// tb_cfg_regs: writes every configuration register and reads it back,
// checks the start pulse, the interrupt (raised by done, cleared by the next
// start), and the forwarding of source-table and TLB writes.
module tb_cfg_regs;
  `include "tb_check.svh"
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we; logic [7:0] cfg_addr; logic [31:0] cfg_wdata, cfg_rdata;
  logic start; logic [4:0] src_user, dst_user; logic [31:0] rd_base, wr_base, total_len, burst_len;
  logic acc_busy, acc_done, irq, lut_we, tlb_we;
  logic [4:0] lut_idx; logic [2:0] lut_x, lut_y; logic [3:0] tlb_idx; logic [11:0] tlb_ppn;
  int checks = 0, failures = 0;
  cfg_regs dut (.*);

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    logic [31:0] v [8];
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; acc_busy = 0; acc_done = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 2; a < 8; a++) begin
      v[a] = $urandom; if (a < 4) v[a] &= 32'h1F;
      wr(8'(a), v[a]);
    end
    for (int a = 2; a < 8; a++) begin
      cfg_addr = 8'(a); #1;
      `CHECK(cfg_rdata == v[a], "register read back")
    end
    `CHECK(src_user == v[2][4:0] && dst_user == v[3][4:0] && rd_base == v[4] && wr_base == v[5] &&
           total_len == v[6] && burst_len == v[7], "register outputs")
    @(negedge clk); cfg_we = 1; cfg_addr = 8'h00; cfg_wdata = 1; #1;
    `CHECK(start, "start pulse")
    @(negedge clk); cfg_we = 0; #1;
    `CHECK(!start && !irq, "start is one cycle, no irq yet")
    acc_done = 1; @(negedge clk); acc_done = 0;
    `CHECK(irq, "irq after done")
    cfg_addr = 8'h01; acc_busy = 1; #1;
    `CHECK(cfg_rdata == 32'h3, "status shows irq and busy")
    wr(8'h00, 1);
    `CHECK(!irq, "irq cleared by start")
    @(negedge clk); cfg_we = 1; cfg_addr = 8'h25; cfg_wdata = 32'b101_011; #1;
    `CHECK(lut_we && lut_idx == 5 && lut_x == 3 && lut_y == 5 && !tlb_we, "table write forwarded")
    cfg_addr = 8'h4A; cfg_wdata = 32'h123; #1;
    `CHECK(tlb_we && tlb_idx == 10 && tlb_ppn == 12'h123 && !lut_we, "TLB write forwarded")
    @(negedge clk); cfg_we = 0;
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
