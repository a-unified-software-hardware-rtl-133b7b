// route_compute: chooses the output port of a packet from its destination.
//
// Nodes are addressed by (x, y, z) coordinates.  The packet goes to the local
// port when the destination equals the node's own address; otherwise it is
// routed dimension by dimension: first along x (east when the destination x
// is larger, west when smaller), then along y (north / south), then along z
// (top / bottom).  Dimension-order routing never forms a cycle of waiting
// packets in a mesh, so the network cannot deadlock.  The 3D addressing
// follows the paper; the routing order and the sign of each direction are
// this design's own choices (east = +x, north = +y, top = +z).
//
// Interface: purely combinational, no clock.
module route_compute
  import scalp_pkg::*;
(
  input  coord_t here,     // this node's coordinates
  input  coord_t dst,      // destination from the packet header
  output port_e  out_port  // port the packet leaves by
);
  always_comb begin
    if      (dst.x > here.x) out_port = P_EAST;
    else if (dst.x < here.x) out_port = P_WEST;
    else if (dst.y > here.y) out_port = P_NORTH;
    else if (dst.y < here.y) out_port = P_SOUTH;
    else if (dst.z > here.z) out_port = P_TOP;
    else if (dst.z < here.z) out_port = P_BOTTOM;
    else                     out_port = P_LOCAL;
  end
endmodule
