// route_xystar: route computation of the hybrid router (X-Y* routing).
//
// X-Y* is dimension-ordered routing (first along X to the destination's
// column, then along Y) with one exception: if this router is the current
// source of the express optical bus and the packet's destination is the bus
// destination, the packet leaves on the optical port and crosses the chip in
// one bus hop.  A packet that reaches its destination leaves on the local
// port.  Because the bus adds one edge from the bus source straight to the
// packet's destination, no cycle of channel dependencies is formed.
// bus_en lets the router stop sending new packets to the bus while the bus
// changes owner.  MESH_Y documents the mesh size; the decision needs only
// MESH_X.  Node id = y*MESH_X + x; north is decreasing y, east is
// increasing x.  Purely combinational.
module route_xystar
  import d3noc_pkg::*;
#(
  parameter int unsigned MESH_X = 16,
  parameter int unsigned MESH_Y = 16
) (
  input  logic [NODE_W-1:0] my_id,
  input  logic [NODE_W-1:0] dst,
  input  logic              bus_valid,
  input  logic              bus_en,
  input  logic [NODE_W-1:0] bus_src,
  input  logic [NODE_W-1:0] bus_dst,
  output port_e             port
);
  logic [NODE_W-1:0] my_x, my_y, d_x, d_y;

  always_comb begin
    my_x = NODE_W'(my_id % NODE_W'(MESH_X));
    my_y = NODE_W'(my_id / NODE_W'(MESH_X));
    d_x  = NODE_W'(dst % NODE_W'(MESH_X));
    d_y  = NODE_W'(dst / NODE_W'(MESH_X));
    if (dst == my_id)                                             port = P_LOCAL;
    else if (bus_valid && bus_en && my_id == bus_src && dst == bus_dst) port = P_OPT;
    else if (d_x > my_x)                                          port = P_EAST;
    else if (d_x < my_x)                                          port = P_WEST;
    else if (d_y < my_y)                                          port = P_NORTH;
    else                                                          port = P_SOUTH;
  end

endmodule
