// Checks XYZ route computation at every position of a 4x4x4 mesh against
// an independent reference: for each router and each destination the
// chosen port must correct X first, then Y, then Z, and eject when equal.
module tb_route_xyz;
  import noc_pkg::*;
  localparam int MX = 4, MY = 4, MZ = 4;
  int checks = 0, failures = 0;

  logic [NODE_W-1:0] dest;
  port_e             port_a, port_b;

  // two routers at different corners of the mesh
  route_xyz #(.MESH_X(MX), .MESH_Y(MY), .MY_X(1), .MY_Y(2), .MY_Z(3)) u_a (.dest, .out_port(port_a));
  route_xyz #(.MESH_X(MX), .MESH_Y(MY), .MY_X(3), .MY_Y(0), .MY_Z(0)) u_b (.dest, .out_port(port_b));

  function automatic port_e ref_route(int mx, int my, int mz, int d);
    int x = d % MX, y = (d / MX) % MY, z = d / (MX * MY);
    if (x != mx) return x > mx ? PORT_XP : PORT_XM;
    if (y != my) return y > my ? PORT_YP : PORT_YM;
    if (z != mz) return z > mz ? PORT_ZP : PORT_ZM;
    return PORT_LOCAL;
  endfunction

  initial begin
    for (int d = 0; d < MX * MY * MZ; d++) begin
      dest = NODE_W'(d);
      #1;
      checks += 2;
      if (port_a != ref_route(1, 2, 3, d)) begin failures++; $display("FAIL a d=%0d got %0d", d, port_a); end
      if (port_b != ref_route(3, 0, 0, d)) begin failures++; $display("FAIL b d=%0d got %0d", d, port_b); end
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
