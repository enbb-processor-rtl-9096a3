// tb_route_unit: exhaustive check of X-Y routing over every switch position
// and destination of a 16 x 16 coordinate space.
`timescale 1ns/1ps
module tb_route_unit;
  import enbb_pkg::*;
  logic [COORD_W-1:0] my_x, my_y;
  head_t hd;
  logic [2:0] port;
  logic here;
  int checks = 0, failures = 0;
  route_unit dut (.*);
  initial begin
    hd = '0;
    for (int mx = 0; mx < 16; mx++) for (int my = 0; my < 16; my++)
      for (int dx = 0; dx < 16; dx++) for (int dy = 0; dy < 16; dy++) begin
        int exp_p;
        my_x = COORD_W'(mx); my_y = COORD_W'(my);
        hd.dx = COORD_W'(dx); hd.dy = COORD_W'(dy); hd.tag = TAG_W'($urandom);
        #1;
        exp_p = dx > mx ? P_EAST : dx < mx ? P_WEST : dy > my ? P_SOUTH : dy < my ? P_NORTH : P_LOCAL;
        checks++;
        if (int'(port) != exp_p || here != (dx == mx && dy == my)) begin
          failures++;
          if (failures < 10) $display("(%0d,%0d)->(%0d,%0d): port %0d", mx, my, dx, dy, port);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
