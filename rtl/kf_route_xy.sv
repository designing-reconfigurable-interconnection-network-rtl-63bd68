// kf_route_xy -- dimension-order (XY) route computation of one router.
//
// The evaluated mesh uses XY routing: a packet first travels along X until its
// column matches, then along Y, then leaves through the Local port. This block is
// purely combinational: given the router's own coordinates and the destination
// of a head flit it returns the output port. Y grows towards the South port and
// X towards the East port; that orientation is this design's choice.
module kf_route_xy
  import kf_noc_pkg::*;
(
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [COORD_W-1:0] dst_x,
  input  logic [COORD_W-1:0] dst_y,
  output port_e              out_port
);
  always_comb begin
    if (dst_x > my_x)      out_port = PORT_E;
    else if (dst_x < my_x) out_port = PORT_W;
    else if (dst_y > my_y) out_port = PORT_S;
    else if (dst_y < my_y) out_port = PORT_N;
    else                   out_port = PORT_L;
  end
endmodule
