// tb_plm: writes random words to random addresses of the private local
// memory while reading others, and checks every read one cycle later against
// a model array.
module tb_plm;
  `include "tb_check.svh"
  localparam int W = 256, N = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en, rd_en;
  logic [6:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  logic [W-1:0] model [N];
  int checks = 0, failures = 0;

  plm #(.DATA_W(W), .WORDS(N)) dut (.*);

  initial begin
    rd_en = 0; wr_en = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      wr_addr = 7'(i); wr_data = {8{$urandom}}; model[i] = wr_data;
    end
    for (int i = 0; i < 1000; i++) begin
      logic [6:0] a;
      @(negedge clk);
      wr_en = ($urandom % 2) != 0; wr_addr = 7'($urandom); wr_data = {8{$urandom}};
      rd_en = 1; a = 7'($urandom); if (wr_en && a == wr_addr) a = a + 1; rd_addr = a;
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      @(negedge clk);
      `CHECK(rd_data == model[a], "read returns the last word written")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
