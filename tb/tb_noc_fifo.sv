// tb_noc_fifo: random push/pop traffic against a queue model. Checks data
// order, that in_ready falls exactly when DEPTH words are held, and that a
// word pushed into an empty queue is visible one cycle later.
module tb_noc_fifo;
  `include "tb_check.svh"
  localparam int W = 16, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  noc_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(!out_valid && in_ready, "empty after reset")
    // latency: push one word, visible after one edge
    in_valid = 1; in_data = 16'hABCD;
    @(posedge clk); model.push_back(in_data);
    @(negedge clk); in_valid = 0;
    `CHECK(out_valid && out_data == 16'hABCD, "one-cycle latency")
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 2) != 0;
      in_data   = 16'($urandom);
      `CHECK(in_ready == (model.size() < D), "in_ready follows occupancy")
      `CHECK(out_valid == (model.size() > 0), "out_valid follows occupancy")
      if (out_valid) `CHECK(out_data == model[0], "data order")
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
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
