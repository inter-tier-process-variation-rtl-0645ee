// End-to-end test of the 3D mesh NoC on a 2 x 2 x 2 mesh, which builds in
// seconds; tb_noc_full runs the same test on the default 64-node mesh.
//
// Phase 1 sends single packets through an idle network and checks each
// one's latency against (3 + LINK_LATENCY) * hops + 10 cycles, the
// uncontended figure of the three-stage router pipeline. Phase 2 has every
// node send packets to random destinations at full rate; phase 3 sends
// everything to one hot-spot node. Every received packet is checked
// against a scoreboard (right node, right source, body words recomputed
// from the tag, no duplicates) and every packet must arrive. The test also
// counts the router mechanisms it must exercise: VC-allocation stalls,
// switch-allocation conflicts, credit (back-pressure) stalls, packets
// interleaved on different VCs at an ejection port, and routes that use
// each of the three mesh dimensions; each that never happened is a failure.
module tb_noc_mesh_top;
  import noc_pkg::*;

  localparam int MX = 2, MY = 2, MZ = 2, LAT = 1;
  localparam int N = MX * MY * MZ;
  localparam int NPKT_RAND = 30;    // random packets per node
  localparam int NPKT_HOT  = 4;     // hot-spot packets per node
  localparam int HOT = 5;           // hot-spot node
  localparam int MAXTAG = 4096;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           tx_valid [N];
  logic           tx_ready [N];
  packet_t        tx_pkt   [N];
  logic           rx_valid [N];
  packet_t        rx_pkt   [N];
  router_events_t events   [N];

  noc_mesh_top #(.MESH_X(MX), .MESH_Y(MY), .MESH_Z(MZ), .LINK_LATENCY(LAT)) dut (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_pkt, .rx_valid, .rx_pkt, .events
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // ---- scoreboard ----
  int  exp_dest [MAXTAG];
  int  exp_src  [MAXTAG];
  bit  sent     [MAXTAG];
  bit  got      [MAXTAG];
  longint t_sent [MAXTAG];
  longint t_got  [MAXTAG];
  int  n_sent = 0, n_got = 0;

  function automatic logic [FLIT_W-1:0] body_word(int tag, int j);
    return 32'(tag) * 32'h9E3779B1 ^ (32'(j + 1) * 32'h85EBCA77);
  endfunction

  function automatic int hops(int a, int b);
    int ax = a % MX, ay = (a / MX) % MY, az = a / (MX * MY);
    int bx = b % MX, by = (b / MX) % MY, bz = b / (MX * MY);
    return (ax > bx ? ax - bx : bx - ax) + (ay > by ? ay - by : by - ay) +
           (az > bz ? az - bz : bz - az);
  endfunction

  // per-node transmit queues
  int q_dest [N][$];
  int q_tag  [N][$];
  int next_tag = 0;

  function automatic void enqueue(int src, int dest);
    q_dest[src].push_back(dest);
    q_tag[src].push_back(next_tag);
    exp_dest[next_tag] = dest;
    exp_src[next_tag]  = src;
    next_tag++;
  endfunction

  // drive tx from the queues
  always_comb begin
    for (int n = 0; n < N; n++) begin
      tx_valid[n] = rst_n && (q_dest[n].size() > 0);
      tx_pkt[n]   = '0;
      if (q_dest[n].size() > 0) begin
        tx_pkt[n].dest = NODE_W'(q_dest[n][0]);
        tx_pkt[n].tag  = TAG_W'(q_tag[n][0]);
        for (int j = 0; j < PKT_FLITS - 1; j++)
          tx_pkt[n].body[j] = body_word(q_tag[n][0], j);
      end
    end
  end

  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (tx_valid[n] && tx_ready[n]) begin
        sent[q_tag[n][0]]   = 1'b1;
        t_sent[q_tag[n][0]] = cycle;
        n_sent++;
        void'(q_dest[n].pop_front());
        void'(q_tag[n].pop_front());
      end
      if (rst_n && rx_valid[n]) begin
        int tag;
        bit ok;
        tag = int'(rx_pkt[n].tag);
        ok = (tag < next_tag) && sent[tag] && !got[tag] &&
             exp_dest[tag] == n && int'(rx_pkt[n].dest) == n &&
             int'(rx_pkt[n].src) == exp_src[tag];
        for (int j = 0; j < PKT_FLITS - 1; j++)
          if (rx_pkt[n].body[j] != body_word(tag, j)) ok = 1'b0;
        checks++;
        if (!ok) begin
          failures++;
          $display("FAIL: node %0d got bad packet tag=%0d src=%0d dest=%0d",
                   n, tag, rx_pkt[n].src, rx_pkt[n].dest);
        end else begin
          got[tag]   = 1'b1;
          t_got[tag] = cycle;
          n_got++;
        end
      end
    end
  end

  // ---- mechanism counters ----
  int n_va_stall = 0, n_sa_stall = 0, n_credit_stall = 0, n_interleave = 0;
  int n_xdim = 0, n_ydim = 0, n_zdim = 0;
  bit              in_pkt  [N][NUM_VCS];

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      flit_t f;
      if (events[n].va_stall)     n_va_stall++;
      if (events[n].sa_stall)     n_sa_stall++;
      if (events[n].credit_stall) n_credit_stall++;
      f = dut.rout[n][PORT_LOCAL];
      if (f.valid) begin
        // another VC of this ejection port has a packet in flight
        for (int v = 0; v < NUM_VCS; v++)
          if (v != int'(f.vc) && in_pkt[n][v]) begin
            n_interleave++;
            break;
          end
        if (is_head(f.ftype)) in_pkt[n][f.vc] = 1'b1;
        if (is_tail(f.ftype)) in_pkt[n][f.vc] = 1'b0;
      end
      for (int d = 1; d < NUM_PORTS; d++) begin
        flit_t g;
        g = dut.rout[n][d];
        if (g.valid && is_head(g.ftype)) begin
          if (d <= 2) n_xdim++;
          else if (d <= 4) n_ydim++;
          else n_zdim++;
        end
      end
    end
  end

  task automatic wait_all(int limit);
    int w = 0;
    while (n_got < next_tag && w < limit) begin
      @(posedge clk);
      w++;
    end
  endtask

  task automatic latency_probe(int src, int dest);
    int tag, expect_lat;
    tag = next_tag;
    enqueue(src, dest);
    wait_all(1000);
    expect_lat = (3 + LAT) * hops(src, dest) + 10;
    checks++;
    if (!got[tag] || int'(t_got[tag] - t_sent[tag]) != expect_lat) begin
      failures++;
      $display("FAIL: latency %0d->%0d got %0d expected %0d", src, dest,
               int'(t_got[tag] - t_sent[tag]), expect_lat);
    end
  endtask

  initial begin
    for (int n = 0; n < N; n++)
      for (int v = 0; v < NUM_VCS; v++) in_pkt[n][v] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // phase 1: latency on an idle network
    latency_probe(0, N - 1);
    latency_probe(N - 1, 0);
    latency_probe(5, 5);
    latency_probe(1, 2);
    latency_probe(3, 4);
    latency_probe(6, 1);

    // phase 2: uniform random traffic
    for (int k = 0; k < NPKT_RAND; k++)
      for (int n = 0; n < N; n++)
        enqueue(n, int'($urandom_range(N - 1)));
    wait_all(50000);

    // phase 3: hot spot
    for (int k = 0; k < NPKT_HOT; k++)
      for (int n = 0; n < N; n++)
        enqueue(n, HOT);
    wait_all(50000);

    repeat (20) @(posedge clk);
    checks++;
    if (n_got != next_tag) begin
      failures++;
      $display("FAIL: %0d of %0d packets delivered", n_got, next_tag);
    end
    $display("packets=%0d va_stall=%0d sa_stall=%0d credit_stall=%0d interleave=%0d x=%0d y=%0d z=%0d",
             n_got, n_va_stall, n_sa_stall, n_credit_stall, n_interleave,
             n_xdim, n_ydim, n_zdim);
    checks++; if (n_va_stall == 0)     begin failures++; $display("FAIL: no VC-allocation stall"); end
    checks++; if (n_sa_stall == 0)     begin failures++; $display("FAIL: no switch conflict"); end
    checks++; if (n_credit_stall == 0) begin failures++; $display("FAIL: no credit stall"); end
    checks++; if (n_interleave == 0)   begin failures++; $display("FAIL: no VC interleaving"); end
    checks++; if (n_xdim == 0 || n_ydim == 0 || n_zdim == 0) begin
      failures++; $display("FAIL: a mesh dimension was never used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
