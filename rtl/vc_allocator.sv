// Virtual-channel allocator: stage 1 of the three-stage router.
//
// Each input VC whose head flit is waiting raises `req` and names the
// output port its route computation chose (`req_port`). The allocator keeps
// a busy bit for every output VC of every output port. Per output port, a
// round-robin arbiter over all P x NUM_VCS input VCs picks one requester
// per cycle, provided the port has a free output VC, and hands it the
// lowest-numbered free one (`gnt`, `gnt_vc`). The granted output VC is busy
// from the next cycle until the packet's tail flit passes the switch
// (`rel_valid`/`rel_vc` per output port), and is free again the cycle
// after the release. One allocation per output port per cycle is this
// design's simplification; the paper names the stage and gives its delay
// model, not its circuit.
module vc_allocator
  import noc_pkg::*;
#(
  parameter int unsigned P = NUM_PORTS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [P-1:0][NUM_VCS-1:0]             req,
  input  logic [P-1:0][NUM_VCS-1:0][PORT_W-1:0] req_port,
  output logic [P-1:0][NUM_VCS-1:0]             gnt,
  output logic [P-1:0][NUM_VCS-1:0][VC_W-1:0]   gnt_vc,
  input  logic [P-1:0]                          rel_valid,
  input  logic [P-1:0][VC_W-1:0]                rel_vc,
  output logic [P-1:0][NUM_VCS-1:0]             ovc_busy
);
  localparam int unsigned NR = P * NUM_VCS;

  logic [P-1:0][NR-1:0]      port_req;
  logic [P-1:0][NR-1:0]      port_gnt;
  logic [P-1:0]              port_any;
  logic [P-1:0]              port_has_free;
  logic [P-1:0][VC_W-1:0]    port_free_vc;
  logic [P-1:0][NUM_VCS-1:0] alloc;

  for (genvar o = 0; o < P; o++) begin : g_out
    always_comb begin
      port_has_free[o] = 1'b0;
      port_free_vc[o]  = '0;
      for (int v = NUM_VCS - 1; v >= 0; v--) begin
        if (!ovc_busy[o][v]) begin
          port_has_free[o] = 1'b1;
          port_free_vc[o]  = VC_W'(v);
        end
      end
      for (int i = 0; i < int'(P); i++)
        for (int v = 0; v < NUM_VCS; v++)
          port_req[o][i*NUM_VCS+v] = req[i][v] && (int'(req_port[i][v]) == o)
                                     && port_has_free[o];
    end

    rr_arbiter #(.N(NR)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (port_req[o]),
      .advance (1'b1),
      .gnt     (port_gnt[o]),
      .gnt_idx (),
      .any     (port_any[o])
    );

    always_comb begin
      alloc[o] = '0;
      if (port_any[o]) alloc[o][port_free_vc[o]] = 1'b1;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ovc_busy[o] <= '0;
      end else begin
        for (int v = 0; v < NUM_VCS; v++) begin
          if (alloc[o][v])
            ovc_busy[o][v] <= 1'b1;
          else if (rel_valid[o] && int'(rel_vc[o]) == v)
            ovc_busy[o][v] <= 1'b0;
        end
      end
    end

    a_rel_busy : assert property (@(posedge clk) disable iff (!rst_n)
      rel_valid[o] |-> ovc_busy[o][rel_vc[o]]);
  end

  always_comb begin
    for (int i = 0; i < int'(P); i++) begin
      for (int v = 0; v < NUM_VCS; v++) begin
        gnt[i][v]    = 1'b0;
        gnt_vc[i][v] = '0;
        for (int o = 0; o < int'(P); o++) begin
          if (port_gnt[o][i*NUM_VCS+v]) begin
            gnt[i][v]    = 1'b1;
            gnt_vc[i][v] = port_free_vc[o];
          end
        end
      end
    end
  end

endmodule
