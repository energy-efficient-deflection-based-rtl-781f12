// hird_node_router -- ring stop of a HiRD local ring.
//
// The router sits on both directions of a bidirectional ring (index 0 =
// clockwise, 1 = counter-clockwise) and, per direction, does only what a
// ring stop must:
//   eject   - a flit whose full address matches this node leaves the ring;
//             each direction has its own ejector, so two flits can leave per
//             cycle.  Ejected flits are registered once and are always
//             accepted by the node (packet reassembly is outside).
//   inject  - a slot that is empty after ejection takes the head of that
//             direction's injection FIFO, unless the injection guarantee is
//             throttling this router.  Traffic already on the ring always
//             wins, so no flow control exists inside the ring.
//   forward - the result goes into the router pipeline register, which is
//             'ring_out'.  Router (1 cycle) + link register = 2 cycles/hop.
// New traffic: the node offers one flit per cycle (destination, tag,
// payload); the router stamps the source address, picks the shorter ring
// direction and queues it in that direction's FIFO; 'inj_ready' is low when
// that FIFO is full.  Each FIFO has a starvation counter; 'starve' (their OR)
// and 'throttle' are the two wires to the ring's throttling controller.
// Latency on an empty ring: a flit offered in cycle t leaves the router
// register at t+2 and is visible at the destination's ejection output at
// t+2+2*hops.  Structure and latency follow the paper; FIFO depth, the
// one-offer-per-cycle node interface and the registered ejection outputs
// are this design's choices.
module hird_node_router
  import hird_pkg::*;
#(
  parameter int RING       = 0,
  parameter int NODE       = 0,
  parameter int INJ_DEPTH  = 4,
  parameter int INJ_THRESH = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t ring_in  [2],
  output flit_t ring_out [2],
  input  logic  inj_valid,
  input  flit_t inj_flit,
  output logic  inj_ready,
  output logic  ej_valid [2],
  output flit_t ej_flit  [2],
  input  logic  throttle,
  output logic  starve
);

  localparam int POS = node_pos(NODE);

  // ---- new traffic: stamp, pick direction, queue ----
  flit_t stamped;
  dir_e  inj_dir;
  logic  unused_exit;
  always_comb begin
    stamped       = inj_flit;
    stamped.valid = 1'b1;
    stamped.src   = '{ring: RING_W'(RING), node: NODE_W'(NODE)};
  end

  hird_route #(.LEVEL(LVL_NODE), .RING(RING), .POS(POS)) u_inj_route (
    .flit(stamped), .exit_here(unused_exit), .inj_dir(inj_dir));

  logic  q_full [2], q_empty [2], q_enq [2], q_deq [2];
  flit_t q_head [2];
  logic  eject [2], do_inj [2], starved [2];

  assign inj_ready = !q_full[inj_dir];

  for (genvar d = 0; d < 2; d++) begin : g_dir
    assign q_enq[d] = inj_valid && !q_full[d] && (inj_dir == dir_e'(d));

    hird_fifo #(.DEPTH(INJ_DEPTH)) u_injq (
      .clk, .rst_n, .enq(q_enq[d]), .din(stamped), .deq(q_deq[d]),
      .dout(q_head[d]), .empty(q_empty[d]), .full(q_full[d]));

    dir_e unused_dir;
    hird_route #(.LEVEL(LVL_NODE), .RING(RING), .POS(POS)) u_ej_route (
      .flit(ring_in[d]), .exit_here(eject[d]), .inj_dir(unused_dir));

    assign do_inj[d] = (!ring_in[d].valid || eject[d]) && !q_empty[d] && !throttle;
    assign q_deq[d]  = do_inj[d];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ring_out[d] <= '0;
        ej_valid[d] <= 1'b0;
        ej_flit[d]  <= '0;
      end else begin
        ring_out[d] <= do_inj[d] ? q_head[d] : (eject[d] ? '0 : ring_in[d]);
        ej_valid[d] <= eject[d];
        ej_flit[d]  <= eject[d] ? ring_in[d] : '0;
      end
    end

    hird_starve_ctr #(.THRESH(INJ_THRESH)) u_starve (
      .clk, .rst_n, .waiting(!q_empty[d]), .injected(do_inj[d]),
      .hold(throttle), .starved(starved[d]));
  end

  assign starve = starved[0] || starved[1];

endmodule
