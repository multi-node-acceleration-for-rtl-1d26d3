// dyxy_route -- output-port choice of the DyXY routing algorithm (Algorithm 1).
//
// Given a packet's next destination (x,y) and the router's own position (Tx,Ty):
//  1. (x,y) == (Tx,Ty): the packet is for this node (local port; the router then
//     splits a multicast packet, see multicast_split);
//  2. x == Tx or y == Ty: continue along the one axis that still differs;
//  3. otherwise both a X and a Y hop are on a shortest path: take the neighbour with
//     the smaller stress value (occupancy of its routing buffer).
// Directions are taken on the torus along the shorter way round; at exactly half the
// ring both ways are equally short and the direction of growing fixed coordinate
// (east / south) is used.
// A tie of stress values selects the X hop. These two tie rules are this design's own.
// "North" is the neighbour at fixed y-1 (the paper's relative y grows towards it).
// Purely combinational.
module dyxy_route
  import multigcn_pkg::*;
#(
  parameter int unsigned MESH_X   = 4,
  parameter int unsigned MESH_Y   = 4,
  parameter int unsigned STRESS_W = 8
) (
  input  logic [COORD_W-1:0]  dst_x_i,
  input  logic [COORD_W-1:0]  dst_y_i,
  input  logic [COORD_W-1:0]  cur_x_i,
  input  logic [COORD_W-1:0]  cur_y_i,
  input  logic [STRESS_W-1:0] stress_i [NPORTS],   // indexed by port_e (local unused)
  output port_e               port_o,
  output logic                adaptive_o           // step 3 was taken
);

  always_comb begin
    int dx, dy;
    port_e px, py;
    dx = torus_rel(int'(dst_x_i), int'(cur_x_i), MESH_X);
    dy = -torus_rel(int'(dst_y_i), int'(cur_y_i), MESH_Y);
    px = (dx > 0) ? P_EAST : P_WEST;
    py = (dy > 0) ? P_NORTH : P_SOUTH;
    adaptive_o = 1'b0;
    if (dx == 0 && dy == 0)      port_o = P_LOCAL;
    else if (dx == 0)            port_o = py;
    else if (dy == 0)            port_o = px;
    else begin
      adaptive_o = 1'b1;
      port_o = (stress_i[py] < stress_i[px]) ? py : px;
    end
  end

endmodule
