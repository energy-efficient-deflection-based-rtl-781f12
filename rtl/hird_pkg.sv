// hird_pkg -- shared types, geometry and routing functions of the HiRD
// (hierarchical rings with deflection) network.
//
// The network is the 16-node two-level hierarchy with 8 bridge routers:
// four bidirectional local rings, each holding 4 node routers and 2 bridge
// routers, joined by one bidirectional global ring that holds the 8 bridge
// routers.  A flit is one 64-bit local-link word.  A node address has one
// digit per hierarchy level: {ring digit, node digit}.  Routing follows the
// tree: a flit whose destination ring differs from the ring it is on leaves
// at any bridge it meets; on the global ring it leaves at any bridge of its
// destination ring; on its destination ring it ejects at the node whose
// address matches.
//
// The ring order of the stops is taken from the drawing of the 8-bridge
// design: on a local ring, clockwise, N0, N1, B1 (right bridge), N2, N3,
// B0 (left bridge); on the global ring, clockwise, the bridges of the
// top-left, top-right, bottom-right and bottom-left local rings, each
// ring's two bridges being adjacent.  That order, the flit field layout and
// the tie rule of the direction choice (clockwise on equal distance) are
// this design's choices.  Per-hop latencies (2 cycles local, 3 global) and
// link widths follow the paper.
package hird_pkg;

  // ---------------- sizes ----------------
  localparam int FLIT_W          = 64;  // local ring link width
  localparam int NUM_RINGS       = 4;
  localparam int NODES_PER_RING  = 4;
  localparam int BRIDGES_PER_RING = 2;
  localparam int NUM_NODES       = NUM_RINGS * NODES_PER_RING;     // 16
  localparam int NUM_BRIDGES     = NUM_RINGS * BRIDGES_PER_RING;   // 8
  localparam int LOCAL_STOPS     = NODES_PER_RING + BRIDGES_PER_RING; // 6
  localparam int GLOBAL_STOPS    = NUM_BRIDGES;                    // 8
  localparam int LOCAL_LINK_LAT  = 1;  // + 1 router register = 2 cycles/hop
  localparam int GLOBAL_LINK_LAT = 2;  // + 1 router register = 3 cycles/hop
  localparam int LOCAL_LOOP      = LOCAL_STOPS  * (LOCAL_LINK_LAT + 1);  // 12
  localparam int GLOBAL_LOOP     = GLOBAL_STOPS * (GLOBAL_LINK_LAT + 1); // 24

  localparam int RING_W = 2;
  localparam int NODE_W = 2;
  localparam int TAG_W  = 8;
  localparam int PAYLOAD_W = FLIT_W - 1 - 2 * (RING_W + NODE_W) - TAG_W; // 47

  typedef struct packed {
    logic [RING_W-1:0] ring;
    logic [NODE_W-1:0] node;
  } addr_t;

  typedef struct packed {
    logic                 valid;
    addr_t                dst;
    addr_t                src;
    logic [TAG_W-1:0]     tag;      // per-source sequence number
    logic [PAYLOAD_W-1:0] payload;
  } flit_t;

  // identity of a flit while it is in the network
  typedef struct packed {
    addr_t            src;
    logic [TAG_W-1:0] tag;
  } flit_id_t;

  typedef enum logic {DIR_CW = 1'b0, DIR_CCW = 1'b1} dir_e;

  // stop kinds for hird_route
  typedef enum logic [1:0] {
    LVL_NODE         = 2'd0,  // node router on a local ring
    LVL_BRIDGE_LOCAL = 2'd1,  // bridge router, local-ring side
    LVL_BRIDGE_GLOBAL = 2'd2  // bridge router, global-ring side
  } level_e;

  function automatic flit_id_t flit_id(flit_t f);
    return '{src: f.src, tag: f.tag};
  endfunction

  // ---------------- geometry ----------------
  // local ring position of node n (0..3): 0,1,3,4
  function automatic int node_pos(int n);
    return (n < 2) ? n : n + 1;
  endfunction

  // local ring position of bridge side s: side 0 (left) = 5, side 1 (right) = 2
  function automatic int bridge_local_pos(int s);
    return (s == 0) ? 5 : 2;
  endfunction

  function automatic bit pos_is_bridge(int p);
    return (p == 2) || (p == 5);
  endfunction

  function automatic int pos_to_node(int p);
    return (p < 2) ? p : p - 1;
  endfunction

  function automatic int pos_to_side(int p);
    return (p == 5) ? 0 : 1;
  endfunction

  // global ring position of the bridge (ring r, side s).
  // ring 0 top-left, 1 top-right, 2 bottom-left, 3 bottom-right.
  function automatic int bridge_global_pos(int r, int s);
    case (r)
      0: return (s == 0) ? 0 : 1;
      1: return (s == 0) ? 2 : 3;
      3: return (s == 0) ? 5 : 4;
      default: return (s == 0) ? 7 : 6;
    endcase
  endfunction

  // ---------------- distances and direction ----------------
  function automatic int cw_dist(int from, int to, int n);
    return (to - from + n) % n;
  endfunction

  function automatic int ccw_dist(int from, int to, int n);
    return (from - to + n) % n;
  endfunction

  // shorter direction from 'from' to 'to' on a ring of n stops (tie: CW)
  function automatic dir_e dir_to(int from, int to, int n);
    return (cw_dist(from, to, n) <= ccw_dist(from, to, n)) ? DIR_CW : DIR_CCW;
  endfunction

  // shorter direction to the nearer of two targets
  function automatic dir_e dir_to_nearer(int from, int t0, int t1, int n);
    int cw, ccw;
    cw  = (cw_dist(from, t0, n)  < cw_dist(from, t1, n))  ? cw_dist(from, t0, n)  : cw_dist(from, t1, n);
    ccw = (ccw_dist(from, t0, n) < ccw_dist(from, t1, n)) ? ccw_dist(from, t0, n) : ccw_dist(from, t1, n);
    return (cw <= ccw) ? DIR_CW : DIR_CCW;
  endfunction

  // direction for a flit entering local ring 'ring' at position 'pos'
  function automatic dir_e local_dir(int ring, int pos, addr_t dst);
    if (int'(dst.ring) == ring)
      return dir_to(pos, node_pos(int'(dst.node)), LOCAL_STOPS);
    else
      return dir_to_nearer(pos, bridge_local_pos(0), bridge_local_pos(1), LOCAL_STOPS);
  endfunction

  // direction for a flit entering the global ring at position 'gpos'
  function automatic dir_e global_dir(int gpos, addr_t dst);
    return dir_to_nearer(gpos, bridge_global_pos(int'(dst.ring), 0),
                         bridge_global_pos(int'(dst.ring), 1), GLOBAL_STOPS);
  endfunction

endpackage
