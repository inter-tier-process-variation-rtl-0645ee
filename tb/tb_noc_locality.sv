// Locality workload on a 4 x 4 x 2 mesh. The traffic copies the locality
// the paper reports for RADIX: 77.6 % of the packets go to a node at
// Manhattan distance 1; the rest are split evenly between distances 2 and
// 3 (this split is the testbench's own). Every node sends 25 packets as
// fast as it can. The test checks that every packet arrives intact, that
// the mix of distances is what was asked for, and that the mean latency of
// distance-1 packets is below that of distance-3 packets.
module tb_noc_locality;
  import noc_pkg::*;

  localparam int MX = 4, MY = 4, MZ = 2, LAT = 1;
  localparam int N = MX * MY * MZ;
  localparam int NPKT_RAND = 25;    // random packets per node
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

  function automatic int pick_dest(int src, int dst_hops);
    int cand [$];
    for (int d = 0; d < N; d++) if (hops(src, d) == dst_hops) cand.push_back(d);
    if (cand.size() == 0) return src;
    return cand[$urandom_range(cand.size() - 1)];
  endfunction

  int n_dist [4];
  longint lat_sum [4];
  int lat_n [4];

  initial begin
    for (int n = 0; n < N; n++)
      for (int v = 0; v < NUM_VCS; v++) in_pkt[n][v] = 1'b0;
    for (int d = 0; d < 4; d++) begin n_dist[d] = 0; lat_sum[d] = 0; lat_n[d] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int k = 0; k < NPKT_RAND; k++)
      for (int n = 0; n < N; n++) begin
        int r, dst_hops;
        r = int'($urandom_range(999));
        dst_hops = (r < 776) ? 1 : (r < 888) ? 2 : 3;
        enqueue(n, pick_dest(n, dst_hops));
        n_dist[dst_hops]++;
      end
    wait_all(100000);
    repeat (20) @(posedge clk);
    checks++;
    if (n_got != next_tag) begin
      failures++;
      $display("FAIL: %0d of %0d packets delivered", n_got, next_tag);
    end
    for (int t = 0; t < next_tag; t++) begin
      int h;
      h = hops(exp_src[t], exp_dest[t]);
      if (got[t] && h >= 1 && h <= 3) begin
        lat_sum[h] += t_got[t] - t_sent[t];
        lat_n[h]++;
      end
    end
    checks++;
    if (n_dist[1] * 1000 < 740 * next_tag || n_dist[1] * 1000 > 810 * next_tag) begin
      failures++; $display("FAIL: distance-1 share %0d of %0d", n_dist[1], next_tag);
    end
    checks++;
    if (lat_n[1] == 0 || lat_n[3] == 0 || lat_sum[1] * lat_n[3] >= lat_sum[3] * lat_n[1]) begin
      failures++; $display("FAIL: distance-1 packets not faster than distance-3 ones");
    end
    $display("packets=%0d d1=%0d d2=%0d d3=%0d mean latency d1=%0d d3=%0d cycles",
             n_got, n_dist[1], n_dist[2], n_dist[3],
             lat_n[1] ? int'(lat_sum[1] / lat_n[1]) : 0, lat_n[3] ? int'(lat_sum[3] / lat_n[3]) : 0);
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
