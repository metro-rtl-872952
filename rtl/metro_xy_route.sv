// metro_xy_route: the algorithmic routing module of a METRO router.
//
// Given the router's own mesh coordinates and the coordinates of the next
// critical node taken from the head flit, it returns the one output port
// that dimension-order (XY) routing chooses: first along x (east/west) until
// the column matches, then along y (north/south). When the target is the
// router itself it returns the local port; the route-compute logic pops such
// a node before asking, so this case only shows up for a malformed header.
// Purely combinational. Dimension-order routing is what the paper uses for
// this module; the port numbering (local, N, E, S, W) and "y grows toward
// south" are this design's choice.
module metro_xy_route
  import metro_pkg::*;
(
  input  node_t      cur,
  input  node_t      target,
  output port_mask_t out_mask
);
  always_comb begin
    out_mask = '0;
    if (target.x > cur.x)      out_mask[P_EAST]  = 1'b1;
    else if (target.x < cur.x) out_mask[P_WEST]  = 1'b1;
    else if (target.y > cur.y) out_mask[P_SOUTH] = 1'b1;
    else if (target.y < cur.y) out_mask[P_NORTH] = 1'b1;
    else                       out_mask[P_LOCAL] = 1'b1;
  end
endmodule
