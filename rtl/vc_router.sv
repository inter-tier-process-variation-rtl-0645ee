// Three-stage virtual-channel router of the 3D mesh NoC.
//
// Seven ports (local, X+, X-, Y+, Y-, Z+, Z-), four virtual channels per
// port, 32-bit flits, credit-based flow control. The pipeline follows the
// router model the paper adopts: virtual-channel allocation, switch
// allocation, crossbar traversal.
//
//   cycle c   : flit on `in_flit[i]`, written into its VC FIFO (input_unit)
//   cycle c+1 : head at FIFO front, XYZ route computed, output VC allocated
//               (vc_allocator) -- body flits skip this stage
//   cycle c+2 : switch allocation (switch_allocator); the winner is popped,
//               its credit goes upstream on `credit_out[i]`, and the flit is
//               registered into the switch-traversal register of its input
//   cycle c+3 : crossbar traversal (crossbar); the flit is on `out_flit[o]`
//
// So a head flit without contention spends three cycles in the router. A
// flit only enters switch allocation when the downstream buffer of its
// output VC has room: `cred` counts free slots per output VC, starting at
// BUF_DEPTH, minus one per flit sent, plus one per `credit_in`. The tail
// flit frees its output VC in the VC allocator as it wins the switch.
//
// Tier placement. In a two-tier monolithic 3D process every VC-allocator
// and switch-allocator stage of a port can be built in the bottom tier
// (BT), the top tier (TT) or across both (MT), and the port's link can run
// in the top (copper) or the bottom (tungsten) tier. PORT_STAGE_TIER and
// LINK_TIER record that choice per port. It does not alter the logic, but
// the paper's rule that a link must share a tier with the stages it
// attaches to is checked here at elaboration. The default, all stages MT
// with top-tier links, is this design's placeholder: the paper obtains the
// real placement per benchmark from its optimiser and does not list it.
// BUF_DEPTH = 6 and the allocator circuits are this design's choices.
module vc_router
  import noc_pkg::*;
#(
  parameter int unsigned MESH_X    = 4,
  parameter int unsigned MESH_Y    = 4,
  parameter int unsigned MESH_Z    = 4,
  parameter int unsigned MY_X      = 0,
  parameter int unsigned MY_Y      = 0,
  parameter int unsigned MY_Z      = 0,
  parameter int unsigned BUF_DEPTH = 6,
  parameter logic [NUM_PORTS-1:0][1:0] PORT_STAGE_TIER = {NUM_PORTS{TIER_MT}},
  parameter logic [NUM_PORTS-1:0]      LINK_TIER       = {NUM_PORTS{LINK_TOP}}
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  flit_t   [NUM_PORTS-1:0]  in_flit,
  output credit_t [NUM_PORTS-1:0]  credit_out,
  output flit_t   [NUM_PORTS-1:0]  out_flit,
  input  credit_t [NUM_PORTS-1:0]  credit_in,
  output router_events_t           events
);
  localparam int unsigned P  = NUM_PORTS;
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  for (genvar p = 0; p < P; p++) begin : g_tier
    if (!tier_rule_ok(PORT_STAGE_TIER[p], LINK_TIER[p])) begin : g_bad
      $error("vc_router: port %0d link tier does not match its stage tier", p);
    end
  end

  logic [P-1:0][NUM_VCS-1:0]             va_req, va_gnt;
  logic [P-1:0][NUM_VCS-1:0][PORT_W-1:0] va_port;
  logic [P-1:0][NUM_VCS-1:0][VC_W-1:0]   va_gnt_vc;
  logic [P-1:0][NUM_VCS-1:0]             sa_req, sa_elig, sa_gnt;
  logic [P-1:0][NUM_VCS-1:0][PORT_W-1:0] sa_port;
  logic [P-1:0][NUM_VCS-1:0][VC_W-1:0]   sa_ovc;
  flit_t [P-1:0]                         pop_flit;
  logic  [P-1:0][PORT_W-1:0]             pop_port;
  logic  [P-1:0]                         rel_valid;
  logic  [P-1:0][VC_W-1:0]               rel_vc;
  logic  [P-1:0][NUM_VCS-1:0]            ovc_busy;

  logic [CW-1:0] cred [P][NUM_VCS];

  flit_t [P-1:0]             st_flit;
  logic  [P-1:0][PORT_W-1:0] st_port;

  // ---- input units (buffer write, route computation, VC state) ----------
  for (genvar i = 0; i < P; i++) begin : g_in
    input_unit #(
      .BUF_DEPTH(BUF_DEPTH),
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .MESH_Z(MESH_Z),
      .MY_X(MY_X), .MY_Y(MY_Y), .MY_Z(MY_Z)
    ) u_iu (
      .clk        (clk),
      .rst_n      (rst_n),
      .in_flit    (in_flit[i]),
      .credit_out (credit_out[i]),
      .va_req     (va_req[i]),
      .va_port    (va_port[i]),
      .va_gnt     (va_gnt[i]),
      .va_gnt_vc  (va_gnt_vc[i]),
      .sa_req     (sa_req[i]),
      .sa_port    (sa_port[i]),
      .sa_ovc     (sa_ovc[i]),
      .pop        (sa_gnt[i]),
      .pop_flit   (pop_flit[i]),
      .pop_port   (pop_port[i])
    );
  end

  // ---- stage 1: VC allocation -------------------------------------------
  vc_allocator #(.P(P)) u_va (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (va_req),
    .req_port  (va_port),
    .gnt       (va_gnt),
    .gnt_vc    (va_gnt_vc),
    .rel_valid (rel_valid),
    .rel_vc    (rel_vc),
    .ovc_busy  (ovc_busy)
  );

  // ---- stage 2: switch allocation, qualified by downstream credits -------
  always_comb begin
    for (int i = 0; i < int'(P); i++)
      for (int v = 0; v < NUM_VCS; v++)
        sa_elig[i][v] = sa_req[i][v] && (cred[sa_port[i][v]][sa_ovc[i][v]] != '0);
  end

  switch_allocator #(.P(P)) u_sa (
    .clk      (clk),
    .rst_n    (rst_n),
    .req      (sa_elig),
    .req_port (sa_port),
    .gnt      (sa_gnt)
  );

  // A tail flit that wins the switch releases its output VC.
  always_comb begin
    rel_valid = '0;
    rel_vc    = '0;
    for (int i = 0; i < int'(P); i++) begin
      if (pop_flit[i].valid && is_tail(pop_flit[i].ftype)) begin
        rel_valid[pop_port[i]] = 1'b1;
        rel_vc[pop_port[i]]    = pop_flit[i].vc;
      end
    end
  end

  // Credit counters per output VC.
  for (genvar o = 0; o < P; o++) begin : g_cred
    for (genvar v = 0; v < NUM_VCS; v++) begin : g_vc
      logic dec, inc;
      always_comb begin
        dec = 1'b0;
        for (int i = 0; i < int'(P); i++)
          if (pop_flit[i].valid && int'(pop_port[i]) == o && int'(pop_flit[i].vc) == v)
            dec = 1'b1;
        inc = credit_in[o].valid && (int'(credit_in[o].vc) == v);
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) cred[o][v] <= CW'(BUF_DEPTH);
        else        cred[o][v] <= cred[o][v] + CW'(inc) - CW'(dec);
      end
      a_cred_range : assert property (@(posedge clk) disable iff (!rst_n)
        !(inc && !dec && int'(cred[o][v]) == BUF_DEPTH));
    end
  end

  // Switch-traversal registers, one per input port.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_flit <= '0;
      st_port <= '0;
    end else begin
      st_flit <= pop_flit;
      st_port <= pop_port;
    end
  end

  // No two switch-traversal registers may target the same output.
  for (genvar o = 0; o < P; o++) begin : g_xchk
    logic [P-1:0] hit;
    for (genvar i = 0; i < P; i++) begin : g_hit
      assign hit[i] = st_flit[i].valid && (int'(st_port[i]) == o);
    end
    a_one_driver : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(hit));
  end

  // ---- stage 3: crossbar traversal ---------------------------------------
  crossbar #(.P(P)) u_xbar (
    .in_flit  (st_flit),
    .in_port  (st_port),
    .out_flit (out_flit)
  );

  always_comb begin
    events.va_stall     = |(va_req & ~va_gnt);
    events.sa_stall     = |(sa_elig & ~sa_gnt);
    events.credit_stall = |(sa_req & ~sa_elig);
    events.flit_out     = 1'b0;
    for (int i = 0; i < int'(P); i++)
      if (st_flit[i].valid) events.flit_out = 1'b1;
  end

endmodule
