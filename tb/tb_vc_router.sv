// Test of one router at (1,1,1) of a 4x4x4 mesh, with the testbench
// playing the four neighbours and the local interface.
// 1. A packet from the local port to (2,1,1) must leave on X+ with the head
//    exactly three cycles after it entered, followed by its body and tail
//    on consecutive cycles, on output VC 0.
// 2. Two packets entering on X- and Y+ in the same cycle, both for X+,
//    must both be delivered intact, on different output VCs.
// 3. With no credits returned on Z+, only BUF_DEPTH (here 4) flits per
//    output VC may leave on Z+ and the waiting flits must show a credit
//    stall; once credits flow again the rest must follow.
// Every flit leaving the router is matched against the expected packet
// stream of its output VC.
module tb_vc_router;
  import noc_pkg::*;
  localparam int P = NUM_PORTS, DEPTH = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t   [P-1:0] in_flit, out_flit;
  credit_t [P-1:0] credit_out, credit_in;
  router_events_t  events;

  vc_router #(.MESH_X(4), .MESH_Y(4), .MESH_Z(4), .MY_X(1), .MY_Y(1), .MY_Z(1),
              .BUF_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_flit, .credit_out, .out_flit, .credit_in, .events);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic flit_t mk(int vc, int k, int dest, int tag);
    flit_t f;
    f.valid = 1; f.vc = VC_W'(vc);
    f.ftype = (k == 0) ? FT_HEAD : (k == PKT_FLITS - 1) ? FT_TAIL : FT_BODY;
    f.data  = (k == 0) ? head_word(NODE_W'(dest), 6'd0, TAG_W'(tag)) : 32'(tag * 256 + k);
    return f;
  endfunction

  // output monitor: per output port and VC, the packet being received
  int     cur_tag [P][NUM_VCS];
  int     cur_k   [P][NUM_VCS];
  int     cur_dest[P][NUM_VCS];
  int     done_pkts = 0;
  bit     hold_credit [P];
  longint cycle = 0;
  longint first_out [P];
  int     nflits [P];

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < P; o++) begin
      flit_t f;
      f = out_flit[o];
      if (f.valid) begin
        int v;
        v = int'(f.vc);
        nflits[o]++;
        if (first_out[o] < 0) first_out[o] = cycle;
        if (is_head(f.ftype)) begin
          cur_tag[o][v] = int'(f.data[FLIT_W-1:2*NODE_W]);
          cur_k[o][v]   = 0;
          cur_dest[o][v] = int'(f.data[NODE_W-1:0]);
        end
        checks++;
        if (cur_tag[o][v] < 0 || f != mk(v, cur_k[o][v], cur_dest[o][v], cur_tag[o][v])) begin
          failures++; $display("FAIL out port %0d vc %0d flit %0d", o, v, cur_k[o][v]);
        end
        cur_k[o][v]++;
        if (is_tail(f.ftype)) begin
          checks++;
          if (cur_k[o][v] != PKT_FLITS) begin failures++; $display("FAIL short packet"); end
          cur_tag[o][v] = -1;
          done_pkts++;
        end
      end
    end
  end

  // Neighbours hand a credit back one cycle after each flit. While a port
  // is held they keep the credits and return them one per idle cycle later.
  int owed [P][NUM_VCS];
  always @(posedge clk) begin
    for (int o = 0; o < P; o++) begin
      credit_in[o] <= '0;
      if (rst_n && out_flit[o].valid) begin
        if (hold_credit[o]) owed[o][out_flit[o].vc]++;
        else credit_in[o] <= '{valid: 1'b1, vc: out_flit[o].vc};
      end else if (rst_n && !hold_credit[o]) begin
        for (int v = 0; v < NUM_VCS; v++)
          if (owed[o][v] > 0) begin
            credit_in[o] <= '{valid: 1'b1, vc: VC_W'(v)};
            owed[o][v]--;
            break;
          end
      end
    end
  end
  longint c_in;

  initial begin
    in_flit = '0;
    for (int o = 0; o < P; o++) begin
      hold_credit[o] = 0; first_out[o] = -1; nflits[o] = 0;
      for (int v = 0; v < NUM_VCS; v++) begin cur_tag[o][v] = -1; cur_k[o][v] = 0; owed[o][v] = 0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. local -> X+ (node 22), latency
    for (int k = 0; k < PKT_FLITS; k++) begin
      @(negedge clk);
      in_flit[PORT_LOCAL] = mk(2, k, 22, 1);
      if (k == 0) c_in = cycle;
    end
    @(negedge clk);
    in_flit = '0;
    repeat (10) @(negedge clk);
    chk(done_pkts == 1, "packet 1 delivered");
    chk(nflits[PORT_XP] == PKT_FLITS, "six flits on X+");
    chk(first_out[PORT_XP] == c_in + 3, $sformatf("three-cycle router latency (got %0d)",
        first_out[PORT_XP] - c_in));

    // 2. contention for X+
    for (int k = 0; k < PKT_FLITS; k++) begin
      @(negedge clk);
      in_flit[PORT_XM] = mk(0, k, 22, 2);
      in_flit[PORT_YP] = mk(1, k, 22, 3);
    end
    @(negedge clk);
    in_flit = '0;
    repeat (20) @(negedge clk);
    chk(done_pkts == 3, "contending packets delivered");
    chk(nflits[PORT_XP] == 3 * PKT_FLITS, "eighteen flits on X+");
    chk(events.va_stall == 0 && events.sa_stall == 0, "quiet at the end");

    // 3. credit back-pressure on Z+ (node 1 + 4*(1 + 4*2) = 37)
    hold_credit[PORT_ZP] = 1;
    for (int k = 0; k < PKT_FLITS; k++) begin
      @(negedge clk);
      in_flit[PORT_LOCAL] = mk(0, k, 37, 4);
      in_flit[PORT_XP]    = mk(3, k, 37, 5);
    end
    @(negedge clk);
    in_flit = '0;
    repeat (20) @(negedge clk);
    chk(nflits[PORT_ZP] == 2 * DEPTH, "Z+ stops when each output VC runs out of credit");
    chk(events.credit_stall == 1, "waiting flits show a credit stall");
    hold_credit[PORT_ZP] = 0;
    repeat (40) @(negedge clk);
    chk(nflits[PORT_ZP] == 2 * PKT_FLITS, "all Z+ flits after credits return");
    chk(done_pkts == 5, "back-pressured packets delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
