// Network interface between a core and the local port of its router.
//
// Transmit side: the core offers a whole packet (`tx_pkt`, destination,
// tag and the five body words) with a valid/ready handshake. The interface
// accepts it when idle, then sends the packet as six flits -- one head flit
// carrying {tag, source, destination} and five body words, the last one
// marked tail -- on one virtual channel, one flit per cycle while that
// channel has credits. Successive packets rotate over the four virtual
// channels. `cred` mirrors the free slots of the router's local input
// buffer (BUF_DEPTH per VC) and is refilled by the router's credits.
//
// Receive side: flits from the router's local output may interleave
// between virtual channels, so each VC has its own reassembly register.
// When a tail flit completes a packet, the packet is presented on
// `rx_pkt` with `rx_valid` high for one cycle. The receive side always
// accepts and returns a credit for every flit in the cycle after it
// arrives. Six flits of 32 bits per packet and four VCs are the paper's
// numbers; the packet layout, the VC rotation and the always-ready
// receiver are this design's choices.
module network_interface
  import noc_pkg::*;
#(
  parameter int unsigned NODE_ID   = 0,
  parameter int unsigned BUF_DEPTH = 6
) (
  input  logic    clk,
  input  logic    rst_n,
  // core side
  input  logic    tx_valid,
  output logic    tx_ready,
  input  packet_t tx_pkt,
  output logic    rx_valid,
  output packet_t rx_pkt,
  // router side
  output flit_t   to_router,
  input  credit_t from_router_credit,
  input  flit_t   from_router,
  output credit_t to_router_credit
);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);
  localparam int unsigned FW = $clog2(PKT_FLITS);

  // ---------------- transmit ----------------
  logic            busy;
  packet_t         cur;
  logic [FW-1:0]   idx;      // next flit to send
  logic [VC_W-1:0] vc;
  logic [CW-1:0]   cred [NUM_VCS];
  logic            send;

  assign tx_ready = !busy;
  assign send     = busy && (cred[vc] != '0);

  always_comb begin
    to_router = '0;
    if (send) begin
      to_router.valid = 1'b1;
      to_router.vc    = vc;
      if (idx == '0) begin
        to_router.ftype = FT_HEAD;
        to_router.data  = head_word(cur.dest, NODE_W'(NODE_ID), cur.tag);
      end else begin
        to_router.ftype = (int'(idx) == PKT_FLITS - 1) ? FT_TAIL : FT_BODY;
        to_router.data  = cur.body[idx - 1'b1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cur  <= '0;
      idx  <= '0;
      vc   <= '0;
    end else begin
      if (!busy && tx_valid) begin
        busy <= 1'b1;
        cur  <= tx_pkt;
        idx  <= '0;
      end else if (send) begin
        if (int'(idx) == PKT_FLITS - 1) begin
          busy <= 1'b0;
          vc   <= vc + 1'b1;
        end
        idx <= idx + 1'b1;
      end
    end
  end

  for (genvar v = 0; v < NUM_VCS; v++) begin : g_cred
    wire inc = from_router_credit.valid && (int'(from_router_credit.vc) == v);
    wire dec = send && (int'(vc) == v);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) cred[v] <= CW'(BUF_DEPTH);
      else        cred[v] <= cred[v] + CW'(inc) - CW'(dec);
    end
  end

  // ---------------- receive ----------------
  packet_t       asm_pkt [NUM_VCS];
  logic [FW-1:0] asm_idx [NUM_VCS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_valid         <= 1'b0;
      rx_pkt           <= '0;
      to_router_credit <= '0;
      for (int v = 0; v < NUM_VCS; v++) begin
        asm_pkt[v] <= '0;
        asm_idx[v] <= '0;
      end
    end else begin
      rx_valid               <= 1'b0;
      to_router_credit.valid <= from_router.valid;
      to_router_credit.vc    <= from_router.vc;
      if (from_router.valid) begin
        if (is_head(from_router.ftype)) begin
          asm_pkt[from_router.vc].dest <= from_router.data[NODE_W-1:0];
          asm_pkt[from_router.vc].src  <= from_router.data[2*NODE_W-1:NODE_W];
          asm_pkt[from_router.vc].tag  <= from_router.data[FLIT_W-1:2*NODE_W];
          asm_idx[from_router.vc]      <= FW'(1);
        end else begin
          asm_pkt[from_router.vc].body[asm_idx[from_router.vc] - 1'b1] <= from_router.data;
          asm_idx[from_router.vc] <= asm_idx[from_router.vc] + 1'b1;
          if (is_tail(from_router.ftype)) begin
            rx_valid <= 1'b1;
            rx_pkt   <= asm_pkt[from_router.vc];
            rx_pkt.body[asm_idx[from_router.vc] - 1'b1] <= from_router.data;
          end
        end
      end
    end
  end

  a_rx_dest : assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid |-> int'(rx_pkt.dest) == NODE_ID);

endmodule
