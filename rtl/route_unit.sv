// route_unit: routing logic of a switch.
//
// Combinational. From the head-flit payload and the switch's own coordinates
// it returns the output port under dimension-order (X first, then Y) routing
// on the 2D mesh, and `here` when the packet is addressed to this switch, in
// which case the port is the local one. The paper names a "routing logic"
// block and a mesh topology but no routing algorithm; X-Y routing is this
// design's choice because it is deadlock-free on a mesh for plain traffic.
module route_unit
  import enbb_pkg::*;
(
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  head_t              hd,
  output logic [2:0]         port,
  output logic               here
);
  always_comb begin
    here = 1'b0;
    if (hd.dx > my_x)      port = 3'(P_EAST);
    else if (hd.dx < my_x) port = 3'(P_WEST);
    else if (hd.dy > my_y) port = 3'(P_SOUTH);
    else if (hd.dy < my_y) port = 3'(P_NORTH);
    else begin
      port = 3'(P_LOCAL);
      here = 1'b1;
    end
  end
endmodule
