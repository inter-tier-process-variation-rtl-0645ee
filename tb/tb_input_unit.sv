// Test of one input unit of the router at (1,1,1) of a 4x4x4 mesh.
// A six-flit packet is written into VC 2; one cycle after the head is
// written the unit must request VC allocation for port X+. After the grant
// (output VC 1) it must request the switch; each pop must return the right
// flit with its VC rewritten to 1 and a credit for VC 2. After the tail the
// VC must be idle. Two packets interleaved on VC 0 and VC 3 (one for the
// local port, one for Z-) check that the VCs keep separate state.
module tb_input_unit;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t                             in_flit, pop_flit;
  credit_t                           credit_out;
  logic [NUM_VCS-1:0]                va_req, va_gnt, sa_req, pop;
  logic [NUM_VCS-1:0][PORT_W-1:0]    va_port, sa_port;
  logic [NUM_VCS-1:0][VC_W-1:0]      va_gnt_vc, sa_ovc;
  logic [PORT_W-1:0]                 pop_port;

  input_unit #(.BUF_DEPTH(6), .MESH_X(4), .MESH_Y(4), .MESH_Z(4), .MY_X(1), .MY_Y(1), .MY_Z(1)) dut (
    .clk, .rst_n, .in_flit, .credit_out, .va_req, .va_port, .va_gnt, .va_gnt_vc,
    .sa_req, .sa_port, .sa_ovc, .pop, .pop_flit, .pop_port);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic flit_t mk(int vc, int k, int dest);
    flit_t f;
    f.valid = 1;
    f.vc    = VC_W'(vc);
    f.ftype = (k == 0) ? FT_HEAD : (k == PKT_FLITS - 1) ? FT_TAIL : FT_BODY;
    f.data  = (k == 0) ? head_word(NODE_W'(dest), 6'd9, 20'h0ABC0 + 20'(vc)) : 32'hC0DE_0000 + 32'(vc * 16 + k);
    return f;
  endfunction

  initial begin
    in_flit = '0; va_gnt = '0; va_gnt_vc = '0; pop = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // write packet on VC 2 to node 23 = (3,1,1): route X+
    for (int k = 0; k < PKT_FLITS; k++) begin
      @(negedge clk);
      in_flit = mk(2, k, 23);
      if (k == 1) begin
        chk(va_req == 4'b0100, "va_req one cycle after head write");
        chk(va_port[2] == PORT_XP, "route X+");
        chk(sa_req == '0, "no sa_req before VA");
        va_gnt = 4'b0100; va_gnt_vc[2] = 2'd1;
      end else begin
        va_gnt = '0;
      end
      if (k == 2) chk(sa_req == 4'b0100 && sa_port[2] == PORT_XP && sa_ovc[2] == 2'd1, "active after VA");
    end
    @(negedge clk);
    in_flit = '0;
    for (int k = 0; k < PKT_FLITS; k++) begin
      flit_t e;
      e = mk(2, k, 23); e.vc = 2'd1;
      chk(sa_req[2], "sa_req while flits remain");
      pop = 4'b0100;
      #1;
      chk(pop_flit == e, $sformatf("pop flit %0d", k));
      chk(pop_port == PORT_XP, "pop port");
      chk(credit_out.valid && credit_out.vc == 2'd2, "credit for VC 2");
      @(negedge clk);
      pop = '0;
    end
    #1;
    chk(va_req == '0 && sa_req == '0, "idle after tail");
    chk(!credit_out.valid, "no credit without pop");

    // interleave: VC0 -> node 21 (local), VC3 -> node 5 = (1,1,0): Z-
    for (int k = 0; k < PKT_FLITS; k++) begin
      in_flit = mk(0, k, 21);
      @(negedge clk);
      in_flit = mk(3, k, 5);
      @(negedge clk);
    end
    in_flit = '0;
    chk(va_req == 4'b1001, "two VA requests");
    chk(va_port[0] == PORT_LOCAL && va_port[3] == PORT_ZM, "routes local and Z-");
    va_gnt = 4'b1001; va_gnt_vc[0] = 2'd3; va_gnt_vc[3] = 2'd0;
    @(negedge clk);
    va_gnt = '0;
    for (int k = 0; k < 2 * PKT_FLITS; k++) begin
      int v;
      flit_t e;
      v = (k % 2 == 0) ? 3 : 0;
      e = mk(v, k / 2, v == 0 ? 21 : 5); e.vc = (v == 0) ? 2'd3 : 2'd0;
      pop = '0; pop[v] = 1'b1;
      #1;
      chk(pop_flit == e, $sformatf("interleaved pop %0d", k));
      chk(pop_port == (v == 0 ? PORT_LOCAL : PORT_ZM), "interleaved port");
      @(negedge clk);
    end
    pop = '0;
    chk(va_req == '0 && sa_req == '0, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
