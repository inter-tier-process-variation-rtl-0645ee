// Switch allocator: stage 2 of the three-stage router.
//
// Separable input-first allocation. An input VC is eligible when it is
// ACTIVE, has a flit at its FIFO front and its output VC downstream has a
// credit (`req`, already qualified by the router). Stage one picks one
// eligible VC per input port with a round-robin arbiter; stage two picks
// one input port per output port with a second round-robin arbiter among
// the inputs whose chosen VC targets that port. `gnt` is one-hot per input
// port and never grants two inputs the same output, so the crossbar needs
// no further checks. A first-stage pointer moves only when its choice also
// won the second stage. The allocator is combinational apart from the
// arbiter pointers. Input-first separable allocation is this design's
// choice; the paper names the stage only.
module switch_allocator
  import noc_pkg::*;
#(
  parameter int unsigned P = NUM_PORTS
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [P-1:0][NUM_VCS-1:0]             req,
  input  logic [P-1:0][NUM_VCS-1:0][PORT_W-1:0] req_port,
  output logic [P-1:0][NUM_VCS-1:0]             gnt
);
  logic [P-1:0][NUM_VCS-1:0] in_gnt;
  logic [P-1:0][VC_W-1:0]    in_idx;
  logic [P-1:0]              in_any;
  logic [P-1:0]              in_won;
  logic [P-1:0][PORT_W-1:0]  in_port;
  logic [P-1:0][P-1:0]       out_req;
  logic [P-1:0][P-1:0]       out_gnt;

  for (genvar i = 0; i < P; i++) begin : g_in
    rr_arbiter #(.N(NUM_VCS)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (req[i]),
      .advance (in_won[i]),
      .gnt     (in_gnt[i]),
      .gnt_idx (in_idx[i]),
      .any     (in_any[i])
    );
    assign in_port[i] = req_port[i][in_idx[i]];
  end

  for (genvar o = 0; o < P; o++) begin : g_out
    always_comb begin
      for (int i = 0; i < int'(P); i++)
        out_req[o][i] = in_any[i] && (int'(in_port[i]) == o);
    end

    rr_arbiter #(.N(P)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (out_req[o]),
      .advance (1'b1),
      .gnt     (out_gnt[o]),
      .gnt_idx (),
      .any     ()
    );
  end

  always_comb begin
    for (int i = 0; i < int'(P); i++) begin
      in_won[i] = 1'b0;
      for (int o = 0; o < int'(P); o++)
        if (out_gnt[o][i]) in_won[i] = 1'b1;
      gnt[i] = in_won[i] ? in_gnt[i] : '0;
    end
  end

endmodule
