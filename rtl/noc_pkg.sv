// Shared types and constants of the monolithic-3D virtual-channel NoC.
//
// The network carries packets of PKT_FLITS flits of FLIT_W bits over
// routers with NUM_VCS virtual channels per port; these three numbers are
// the ones the evaluated design uses (v = 4, w = 32, six flits per packet).
// A flit travels with a small sideband (valid, flit type, virtual channel)
// next to its FLIT_W data bits. The head flit's data word carries the
// destination node in bits [5:0], the source node in bits [11:6] and a
// 20-bit packet tag in bits [31:12]; this layout is this design's choice.
//
// The package also holds the tier-placement types of a monolithic 3D router:
// each VC-allocator / switch-allocator stage of a port can be bottom-tier
// only (BT), top-tier only (TT) or split over both tiers (MT), and each
// inter-router link lies either in the copper top tier or in the tungsten
// bottom tier. A link must sit on a tier its router stage touches; the
// function tier_rule_ok() states that rule and the router checks it at
// elaboration. Tier placement changes timing and energy, not logic.
package noc_pkg;

  localparam int unsigned NUM_VCS   = 4;   // virtual channels per port
  localparam int unsigned FLIT_W    = 32;  // flit data width in bits
  localparam int unsigned PKT_FLITS = 6;   // flits per packet
  localparam int unsigned NUM_PORTS = 7;   // local + X+ X- Y+ Y- Z+ Z-
  localparam int unsigned NODE_W    = 6;   // node id width (up to 64 nodes)
  localparam int unsigned TAG_W     = FLIT_W - 2 * NODE_W;
  localparam int unsigned VC_W      = $clog2(NUM_VCS);
  localparam int unsigned PORT_W    = $clog2(NUM_PORTS);

  typedef enum logic [1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3
  } flit_type_e;

  typedef enum logic [PORT_W-1:0] {
    PORT_LOCAL = 3'd0,
    PORT_XP    = 3'd1,
    PORT_XM    = 3'd2,
    PORT_YP    = 3'd3,
    PORT_YM    = 3'd4,
    PORT_ZP    = 3'd5,
    PORT_ZM    = 3'd6
  } port_e;

  typedef struct packed {
    logic              valid;
    flit_type_e        ftype;
    logic [VC_W-1:0]   vc;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // One credit returned upstream: a buffer slot of virtual channel vc freed.
  typedef struct packed {
    logic            valid;
    logic [VC_W-1:0] vc;
  } credit_t;

  // A whole packet as the core sees it at the network interface.
  typedef struct packed {
    logic [NODE_W-1:0]                   dest;
    logic [NODE_W-1:0]                   src;
    logic [TAG_W-1:0]                    tag;
    logic [PKT_FLITS-2:0][FLIT_W-1:0]    body;
  } packet_t;

  // Per-cycle event flags of one router, for performance counting.
  typedef struct packed {
    logic va_stall;      // a head flit requested an output VC and got none
    logic sa_stall;      // a flit with credit requested the switch and lost
    logic credit_stall;  // a flit waited only because downstream had no credit
    logic flit_out;      // at least one flit crossed the crossbar
  } router_events_t;

  typedef enum logic [1:0] {
    TIER_BT = 2'd0,   // bottom tier only
    TIER_TT = 2'd1,   // top tier only
    TIER_MT = 2'd2    // split over both tiers
  } stage_tier_e;

  typedef enum logic {
    LINK_TOP    = 1'b0,  // copper, top tier
    LINK_BOTTOM = 1'b1   // tungsten, bottom tier
  } link_tier_e;

  function automatic logic is_head(flit_type_e t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(flit_type_e t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction

  // Top-tier links may only attach to TT or MT stages, bottom-tier links
  // only to BT or MT stages.
  function automatic logic tier_rule_ok(logic [1:0] stage, logic link);
    if (stage == TIER_MT) return 1'b1;
    if (link == LINK_TOP) return stage == TIER_TT;
    return stage == TIER_BT;
  endfunction

  function automatic logic [FLIT_W-1:0] head_word(logic [NODE_W-1:0] dest,
                                                  logic [NODE_W-1:0] src,
                                                  logic [TAG_W-1:0]  tag);
    return {tag, src, dest};
  endfunction

endpackage
