// tb_lookahead_route: exhaustive check of the lookahead routing unit over an
// 8 x 8 coordinate space. The expected ports come from an independent model
// that walks the packet hop by hop: first along x, then along y.
module tb_lookahead_route;
  import noc_pkg::*;
  `include "tb_check.svh"

  coord_t cx, cy, dx, dy;
  port_e port_here;
  port_mask_t next_mask;
  int checks = 0, failures = 0;

  lookahead_route dut (.cur_x(cx), .cur_y(cy), .dst_x(dx), .dst_y(dy), .port_here, .next_mask);

  // Reference: direction of one XY step, as port number.
  function automatic int step(int x, int y, int tx, int ty);
    if (tx != x) return (tx > x) ? 3 : 2;   // EAST : WEST
    if (ty != y) return (ty > y) ? 1 : 0;   // SOUTH : NORTH
    return 4;                              // LOCAL
  endfunction

  initial begin
    for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++)
    for (int c = 0; c < 8; c++) for (int d = 0; d < 8; d++) begin
      int p, nx, ny, q;
      logic [4:0] exp_mask;
      cx = 3'(a); cy = 3'(b); dx = 3'(c); dy = 3'(d);
      #1;
      p  = step(a, b, c, d);
      nx = a + ((p == 3) ? 1 : (p == 2) ? -1 : 0);
      ny = b + ((p == 1) ? 1 : (p == 0) ? -1 : 0);
      q  = step(nx, ny, c, d);
      exp_mask = (p == 4) ? 5'b0 : 5'(1 << q);
      `CHECK(int'(port_here) == p, "port at this router")
      `CHECK(next_mask == exp_mask, "port at the next router")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
