// ppb_route_xy: route computation of the router, dimension-ordered X-Y
// routing as listed in the paper's system parameters.
//
// A packet first travels along X until its column matches, then along Y,
// then leaves through the local port. Port numbering and the direction of
// the axes (x grows to the east, y grows to the south) are this design's
// choice. Purely combinational.
module ppb_route_xy
  import ppb_pkg::*;
(
  input  node_t              here,
  input  node_t              dst,
  output logic [PORT_W-1:0]  port
);

  always_comb begin
    if      (dst.x > here.x) port = P_EAST;
    else if (dst.x < here.x) port = P_WEST;
    else if (dst.y > here.y) port = P_SOUTH;
    else if (dst.y < here.y) port = P_NORTH;
    else                     port = P_LOCAL;
  end

endmodule
