// hird_network -- 16-node HiRD: hierarchical rings with deflection.
//
// Four bidirectional 64-bit local rings, each with four node routers and two
// bridge routers, are joined by one bidirectional global ring of eight
// bridge routers whose width is LANES flits (2 x 64 bits by default: twice
// the local bandwidth).  Inside a ring nothing is buffered and nothing is
// flow-controlled: traffic on the ring always has priority, new flits enter
// free slots, and a flit that cannot enter a full transfer FIFO simply
// circles the ring again (a deflection).  Only the bridges buffer flits.
// Delivery is guaranteed by the Swap Rule in the bridges (no deadlock), the
// bridges' transfer observers (no flit is refused a transfer forever) and
// the injection guarantee: a throttling controller per local ring, fed by
// one starvation wire per injection point, throttles the ring's nodes, and
// after persisting starvation escalates to a global controller that
// throttles all nodes.
//
// Stop numbering: local ring r, clockwise positions 0..5 = N0, N1, B1, N2,
// N3, B0; global positions 0..7 = bridges (0,0),(0,1),(1,0),(1,1),(3,1),
// (3,0),(2,1),(2,0) as (ring, side).  Node index = 4*ring + node, bridge
// index = 2*ring + side.  Per-hop latency is 2 cycles on local rings and 3
// on the global ring.
//
// Interface: per node, a valid/ready injection port (destination, tag and
// payload; the source is stamped by the router) and two ejection outputs
// that must be consumed every cycle.  The status outputs show the
// throttling state and per-bridge events for performance counting.
// The topology, latencies, widths and FIFO depths follow the paper's main
// 16-node configuration; the stop order is read off its 8-bridge drawing.
module hird_network
  import hird_pkg::*;
#(
  parameter int LANES       = 2,
  parameter int INJ_DEPTH   = 4,
  parameter int L2G_DEPTH   = 1,
  parameter int G2L_DEPTH   = 4,
  parameter int INJ_THRESH  = 100,
  parameter int ESC_THRESH  = 100,
  parameter int XFER_THRESH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inj_valid [NUM_NODES],
  input  flit_t                  inj_flit  [NUM_NODES],
  output logic                   inj_ready [NUM_NODES],
  output logic                   ej_valid  [NUM_NODES][2],
  output flit_t                  ej_flit   [NUM_NODES][2],
  output logic [NUM_RINGS-1:0]   ring_throttle,
  output logic                   global_throttle,
  output logic [NUM_BRIDGES-1:0] evt_deflect,
  output logic [NUM_BRIDGES-1:0] evt_swap,
  output logic [NUM_BRIDGES-1:0] evt_reserve
);

  localparam int RM = NODES_PER_RING + BRIDGES_PER_RING;  // members per ring controller

  // stop outputs (router registers) and stop inputs (link outputs)
  flit_t l_out [NUM_RINGS][LOCAL_STOPS][2];
  flit_t l_in  [NUM_RINGS][LOCAL_STOPS][2];
  flit_t g_out [GLOBAL_STOPS][LANES][2];
  flit_t g_in  [GLOBAL_STOPS][LANES][2];

  logic [NUM_BRIDGES-1:0] br_global_starve;
  logic [NUM_RINGS-1:0]   ring_escalate;

  for (genvar r = 0; r < NUM_RINGS; r++) begin : g_ring
    logic [RM-1:0] starve, throttle;

    for (genvar p = 0; p < LOCAL_STOPS; p++) begin : g_stop
      // links: clockwise p -> p+1, counter-clockwise p -> p-1
      hird_link #(.LAT(LOCAL_LINK_LAT)) u_link_cw (
        .clk, .rst_n, .din(l_out[r][p][0]), .dout(l_in[r][(p+1)%LOCAL_STOPS][0]));
      hird_link #(.LAT(LOCAL_LINK_LAT)) u_link_ccw (
        .clk, .rst_n, .din(l_out[r][p][1]), .dout(l_in[r][(p+LOCAL_STOPS-1)%LOCAL_STOPS][1]));

      if (pos_is_bridge(p)) begin : g_bridge
        localparam int S  = pos_to_side(p);
        localparam int GP = bridge_global_pos(r, S);
        localparam int B  = r * BRIDGES_PER_RING + S;
        hird_bridge_router #(
          .RING(r), .SIDE(S), .LANES(LANES), .L2G_DEPTH(L2G_DEPTH), .G2L_DEPTH(G2L_DEPTH),
          .INJ_THRESH(INJ_THRESH), .XFER_THRESH(XFER_THRESH)
        ) u_bridge (
          .clk, .rst_n,
          .l_in(l_in[r][p]), .l_out(l_out[r][p]),
          .g_in(g_in[GP]),   .g_out(g_out[GP]),
          .local_starve(starve[NODES_PER_RING + S]),
          .global_starve(br_global_starve[B]),
          .evt_deflect(evt_deflect[B]), .evt_swap(evt_swap[B]), .evt_reserve(evt_reserve[B]));
      end else begin : g_node
        localparam int N  = pos_to_node(p);
        localparam int ID = r * NODES_PER_RING + N;
        hird_node_router #(
          .RING(r), .NODE(N), .INJ_DEPTH(INJ_DEPTH), .INJ_THRESH(INJ_THRESH)
        ) u_node (
          .clk, .rst_n,
          .ring_in(l_in[r][p]), .ring_out(l_out[r][p]),
          .inj_valid(inj_valid[ID]), .inj_flit(inj_flit[ID]), .inj_ready(inj_ready[ID]),
          .ej_valid(ej_valid[ID]), .ej_flit(ej_flit[ID]),
          .throttle(throttle[N]), .starve(starve[N]));
      end
    end

    // injection guarantee, ring level (bridge members are never throttled)
    logic unused_active;
    hird_throttle_ctrl #(.N(RM), .ESC_THRESH(ESC_THRESH)) u_ring_ctrl (
      .clk, .rst_n, .starve(starve), .ext_throttle(global_throttle),
      .throttle(throttle), .active(unused_active), .escalate(ring_escalate[r]));
    assign ring_throttle[r] = |throttle[NODES_PER_RING-1:0];
  end

  // global ring links, per lane and direction
  for (genvar gp = 0; gp < GLOBAL_STOPS; gp++) begin : g_gstop
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      hird_link #(.LAT(GLOBAL_LINK_LAT)) u_link_cw (
        .clk, .rst_n, .din(g_out[gp][l][0]), .dout(g_in[(gp+1)%GLOBAL_STOPS][l][0]));
      hird_link #(.LAT(GLOBAL_LINK_LAT)) u_link_ccw (
        .clk, .rst_n, .din(g_out[gp][l][1]), .dout(g_in[(gp+GLOBAL_STOPS-1)%GLOBAL_STOPS][l][1]));
    end
  end

  // injection guarantee, global level: ring escalations and bridge
  // global-side starvation; while active, every ring throttles its nodes
  logic [NUM_RINGS+NUM_BRIDGES-1:0] unused_gthrottle;
  logic                             unused_gesc;
  hird_throttle_ctrl #(.N(NUM_RINGS + NUM_BRIDGES), .ESC_THRESH(ESC_THRESH)) u_global_ctrl (
    .clk, .rst_n, .starve({br_global_starve, ring_escalate}), .ext_throttle(1'b0),
    .throttle(unused_gthrottle), .active(global_throttle), .escalate(unused_gesc));

endmodule
