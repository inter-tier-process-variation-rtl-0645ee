// Top level: a 64-node 3D mesh NoC of three-stage virtual-channel routers,
// one router and one network interface per core.
//
// The nodes form a MESH_X x MESH_Y x MESH_Z mesh (4 x 4 x 4 by default,
// 64 nodes as in the evaluated 64-core system), numbered
// id = x + MESH_X * (y + MESH_Y * z). Every router has seven ports; port 0
// goes to the node's network interface, ports 1..6 to the X+, X-, Y+, Y-,
// Z+ and Z- neighbours through one noc_link per direction. Ports on the
// faces of the mesh are tied off: nothing arrives on them and XYZ routing
// never sends anything out of them. Routing is XYZ dimension order, which
// keeps the mesh free of deadlock.
//
// Interface per node n: tx_valid[n]/tx_ready[n]/tx_pkt[n] hand a packet to
// the network (tx_pkt[n].src is ignored; the interface fills in n),
// rx_valid[n]/rx_pkt[n] deliver a complete packet for one cycle, and
// events[n] exposes the router's per-cycle stall and activity flags.
//
// Latency without contention: the head flit leaves the source interface
// one cycle after the tx handshake, spends three cycles in each router and
// LINK_LATENCY cycles on each link; the tail follows five cycles behind it
// and the packet appears on rx_pkt one cycle after the tail leaves the last
// router. A packet over H hops therefore shows up (3 + LINK_LATENCY) * H +
// 10 cycles after the cycle of its tx handshake. The mesh and the 64 nodes follow the paper; the mesh
// dimensions (4 x 4 x 4) are this design's reading of "3D mesh" with 64
// nodes, as the paper gives no dimensions.
module noc_mesh_top
  import noc_pkg::*;
#(
  parameter int unsigned MESH_X       = 4,
  parameter int unsigned MESH_Y       = 4,
  parameter int unsigned MESH_Z       = 4,
  parameter int unsigned BUF_DEPTH    = 6,
  parameter int unsigned LINK_LATENCY = 1,
  localparam int unsigned N           = MESH_X * MESH_Y * MESH_Z
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           tx_valid [N],
  output logic           tx_ready [N],
  input  packet_t        tx_pkt   [N],
  output logic           rx_valid [N],
  output packet_t        rx_pkt   [N],
  output router_events_t events   [N]
);
  if (N > (1 << NODE_W)) begin : g_too_big
    $error("noc_mesh_top: %0d nodes exceed the %0d-bit node id", N, NODE_W);
  end

  flit_t   [NUM_PORTS-1:0] rin   [N];
  flit_t   [NUM_PORTS-1:0] rout  [N];
  credit_t [NUM_PORTS-1:0] cin   [N];
  credit_t [NUM_PORTS-1:0] cout  [N];

  function automatic int nbr(int n, int d);
    int x, y, z;
    x = n % MESH_X;
    y = (n / MESH_X) % MESH_Y;
    z = n / (MESH_X * MESH_Y);
    case (d)
      1: x++;
      2: x--;
      3: y++;
      4: y--;
      5: z++;
      6: z--;
      default: ;
    endcase
    if (x < 0 || x >= int'(MESH_X) || y < 0 || y >= int'(MESH_Y) ||
        z < 0 || z >= int'(MESH_Z)) return -1;
    return x + MESH_X * (y + MESH_Y * z);
  endfunction

  function automatic int opp(int d);
    return (d % 2 == 1) ? d + 1 : d - 1;
  endfunction

  for (genvar n = 0; n < N; n++) begin : g_node
    vc_router #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .MESH_Z(MESH_Z),
      .MY_X(n % MESH_X), .MY_Y((n / MESH_X) % MESH_Y), .MY_Z(n / (MESH_X * MESH_Y)),
      .BUF_DEPTH(BUF_DEPTH)
    ) u_router (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_flit    (rin[n]),
      .credit_out (cout[n]),
      .out_flit   (rout[n]),
      .credit_in  (cin[n]),
      .events     (events[n])
    );

    network_interface #(
      .NODE_ID(n), .BUF_DEPTH(BUF_DEPTH)
    ) u_ni (
      .clk                (clk),
      .rst_n              (rst_n),
      .tx_valid           (tx_valid[n]),
      .tx_ready           (tx_ready[n]),
      .tx_pkt             (tx_pkt[n]),
      .rx_valid           (rx_valid[n]),
      .rx_pkt             (rx_pkt[n]),
      .to_router          (rin[n][PORT_LOCAL]),
      .from_router_credit (cout[n][PORT_LOCAL]),
      .from_router        (rout[n][PORT_LOCAL]),
      .to_router_credit   (cin[n][PORT_LOCAL])
    );

    for (genvar d = 1; d < NUM_PORTS; d++) begin : g_dir
      if (nbr(n, d) >= 0) begin : g_link
        noc_link #(.LATENCY(LINK_LATENCY)) u_link (
          .clk         (clk),
          .rst_n       (rst_n),
          .up_flit     (rout[n][d]),
          .down_flit   (rin[nbr(n, d)][opp(d)]),
          .down_credit (cout[nbr(n, d)][opp(d)]),
          .up_credit   (cin[n][d])
        );
      end else begin : g_edge
        assign rin[n][d] = '0;
        assign cin[n][d] = '0;
      end
    end
  end

endmodule
