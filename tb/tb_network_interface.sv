// Test of the network interface of node 13 with a two-slot local buffer.
// Transmit: a packet must leave as head {tag, 13, dest}, four body words
// and a tail on VC 0, one flit per cycle while credits last; with no
// credit returned it must stop after two flits and resume one flit per
// returned credit. The next packet must use VC 1. Receive: two packets
// interleaved flit by flit on VCs 1 and 3 must each be reassembled and
// presented once, and every received flit must be credited back one
// cycle later.
module tb_network_interface;
  import noc_pkg::*;
  localparam int ME = 13, DEPTH = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    tx_valid, tx_ready, rx_valid;
  packet_t tx_pkt, rx_pkt;
  flit_t   to_router, from_router;
  credit_t from_router_credit, to_router_credit;

  network_interface #(.NODE_ID(ME), .BUF_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_pkt, .rx_valid, .rx_pkt,
    .to_router, .from_router_credit, .from_router, .to_router_credit);

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic packet_t mkpkt(int dest, int tag, int src);
    packet_t p;
    p.dest = NODE_W'(dest); p.src = NODE_W'(src); p.tag = TAG_W'(tag);
    for (int j = 0; j < PKT_FLITS - 1; j++) p.body[j] = 32'(tag) * 32'h1000 + 32'(j);
    return p;
  endfunction

  function automatic flit_t exp_flit(packet_t p, int k, int vc);
    flit_t f;
    f.valid = 1; f.vc = VC_W'(vc);
    f.ftype = (k == 0) ? FT_HEAD : (k == PKT_FLITS - 1) ? FT_TAIL : FT_BODY;
    f.data  = (k == 0) ? head_word(p.dest, NODE_W'(ME), p.tag) : p.body[k - 1];
    return f;
  endfunction

  int nsent;
  packet_t pa, pb, pc, pd;
  int rx_count;
  packet_t rx_seen [$];
  flit_t   last_in;

  always @(posedge clk) if (rst_n) begin
    if (rx_valid) rx_seen.push_back(rx_pkt);
  end

  initial begin
    tx_valid = 0; tx_pkt = '0; from_router = '0; from_router_credit = '0;
    pa = mkpkt(9, 'h123, 0); pb = mkpkt(40, 'h456, 0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    tx_valid = 1; tx_pkt = pa;
    chk(tx_ready, "ready when idle");
    @(negedge clk);
    tx_valid = 0;
    chk(!tx_ready, "busy after accept");
    // two credits: two flits back to back
    for (int k = 0; k < 2; k++) begin
      chk(to_router == exp_flit(pa, k, 0), $sformatf("flit %0d", k));
      @(negedge clk);
    end
    repeat (3) begin
      chk(!to_router.valid, "credit stall");
      @(negedge clk);
    end
    // return one credit per cycle from now on
    for (int k = 2; k < PKT_FLITS; k++) begin
      from_router_credit = '{valid: 1'b1, vc: 2'd0};
      @(negedge clk);
      from_router_credit = '0;
      chk(to_router == exp_flit(pa, k, 0), $sformatf("flit %0d after credit", k));
      @(negedge clk);
      chk(!to_router.valid || k == PKT_FLITS - 1, "one flit per credit");
    end
    // second packet goes out on VC 1
    @(negedge clk);
    chk(tx_ready, "ready after tail");
    tx_valid = 1; tx_pkt = pb;
    @(negedge clk);
    tx_valid = 0;
    chk(to_router == exp_flit(pb, 0, 1), "second packet head on VC 1");

    // receive two interleaved packets on VC 1 and VC 3
    pc = mkpkt(ME, 'h777, 50); pd = mkpkt(ME, 'h888, 7);
    for (int k = 0; k < PKT_FLITS; k++) begin
      flit_t f;
      f = exp_flit(pc, k, 1); f.data = (k == 0) ? head_word(pc.dest, pc.src, pc.tag) : f.data;
      from_router = f;
      @(negedge clk);
      chk(to_router_credit.valid && to_router_credit.vc == 2'd1, "credit for VC 1");
      f = exp_flit(pd, k, 3); f.data = (k == 0) ? head_word(pd.dest, pd.src, pd.tag) : f.data;
      from_router = f;
      @(negedge clk);
      chk(to_router_credit.valid && to_router_credit.vc == 2'd3, "credit for VC 3");
    end
    from_router = '0;
    repeat (3) @(negedge clk);
    chk(rx_seen.size() == 2, "two packets received");
    if (rx_seen.size() == 2) begin
      chk(rx_seen[0] == pc, "first packet intact");
      chk(rx_seen[1] == pd, "second packet intact");
    end
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
