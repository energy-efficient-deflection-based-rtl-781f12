// hird_route -- routing decision of one HiRD ring stop.
//
// Hierarchical rings form a tree, so routing needs no tables: a flit goes up
// the hierarchy until it reaches a ring whose prefix matches its
// destination, then down.  For the stop this instance sits at (chosen by
// LEVEL, RING and POS) it answers two questions, purely combinationally:
//   exit_here - the flit on the ring input leaves the ring here: at a node
//               router when the whole address matches; at the local side of
//               a bridge when the destination is on another ring; at the
//               global side of a bridge when the destination is on this
//               bridge's local ring.
//   inj_dir   - for a flit entering the ring at this stop (new traffic at a
//               node, a transfer out of a bridge FIFO), the ring direction
//               with the shorter path: to the destination node on its own
//               ring, or to the nearer bridge of the ring it must reach.
// Leaving at the first suitable bridge follows the paper; the clockwise
// tie rule is this design's choice.
module hird_route
  import hird_pkg::*;
#(
  parameter level_e LEVEL = LVL_NODE,
  parameter int     RING  = 0,
  parameter int     POS   = 0    // local position, or global position for LVL_BRIDGE_GLOBAL
) (
  input  flit_t flit,
  output logic  exit_here,
  output dir_e  inj_dir
);

  always_comb begin
    unique case (LEVEL)
      LVL_NODE: begin
        exit_here = flit.valid && (int'(flit.dst.ring) == RING)
                               && (int'(flit.dst.node) == pos_to_node(POS));
        inj_dir   = local_dir(RING, POS, flit.dst);
      end
      LVL_BRIDGE_LOCAL: begin
        exit_here = flit.valid && (int'(flit.dst.ring) != RING);
        inj_dir   = local_dir(RING, POS, flit.dst);
      end
      default: begin
        exit_here = flit.valid && (int'(flit.dst.ring) == RING);
        inj_dir   = global_dir(POS, flit.dst);
      end
    endcase
  end

endmodule
