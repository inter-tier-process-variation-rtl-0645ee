// XYZ dimension-order route computation for a 3D mesh.
//
// Given the destination node of a head flit, returns the output port of
// the router at (MY_X, MY_Y, MY_Z): first correct X, then Y, then Z, and
// eject to the local port when all three match. Nodes are numbered
// id = x + MESH_X * (y + MESH_Y * z), so the Z extent of the mesh is not
// needed here. Purely combinational; the router uses
// it inside its first (VC allocation) stage. Dimension-order routing is the
// routing the evaluated 3D mesh uses; the numbering and port encoding are
// this design's own.
module route_xyz
  import noc_pkg::*;
#(
  parameter int unsigned MESH_X = 4,
  parameter int unsigned MESH_Y = 4,
  parameter int unsigned MY_X   = 0,
  parameter int unsigned MY_Y   = 0,
  parameter int unsigned MY_Z   = 0
) (
  input  logic [NODE_W-1:0] dest,
  output port_e             out_port
);
  int unsigned dx, dy, dz;

  always_comb begin
    dx = int'(dest) % MESH_X;
    dy = (int'(dest) / MESH_X) % MESH_Y;
    dz = int'(dest) / (MESH_X * MESH_Y);
    if      (dx > MY_X) out_port = PORT_XP;
    else if (dx < MY_X) out_port = PORT_XM;
    else if (dy > MY_Y) out_port = PORT_YP;
    else if (dy < MY_Y) out_port = PORT_YM;
    else if (dz > MY_Z) out_port = PORT_ZP;
    else if (dz < MY_Z) out_port = PORT_ZM;
    else                out_port = PORT_LOCAL;
  end

endmodule
