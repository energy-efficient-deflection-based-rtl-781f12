// hird_bridge_router -- bridge between a HiRD local ring and the global ring.
//
// On each ring the bridge looks like a node router: ring inputs pass an
// ejector, then an injection mux, then a router pipeline register.  On the
// local ring there is one interface per direction (index d: 0 clockwise, 1
// counter-clockwise); the global ring is LANES flit-wide lanes, each a
// bidirectional ring of its own, so there are 2*LANES global interfaces
// (index g = 2*lane + d).  Per cycle:
//   1. Transfer check.  A local flit for another ring, or a global flit for
//      this bridge's local ring, wants to transfer.  It enters the transfer
//      FIFO behind its own ejector when that FIFO is not full and the
//      transfer-guarantee observer of that input allows it.
//   2. Swap Rule.  If a local flit and a global flit both want to transfer
//      and neither got into its FIFO, the first such pair exchanges places
//      through a bypass path: each takes the other's slot (at most one swap
//      per cycle).  This breaks the only cyclic dependence of the tree.
//   3. Deflection.  Any other flit that wanted to transfer stays on its
//      ring and circles to try again.
//   4. Injection.  Crossbars send FIFO heads to free slots of the other
//      ring: a global-to-local head to the local direction that is shorter
//      to its destination node (heads compete round-robin); a
//      local-to-global head to the lowest free lane of the direction
//      shorter to its destination ring (the two heads alternate priority).
// Each FIFO head has a starvation counter: 'local_starve' reports heads
// waiting to enter the local ring (to that ring's throttling controller),
// 'global_starve' heads waiting to enter the global ring (to the global
// controller).  The evt_* outputs pulse on transfer deflections, swaps and
// new reservations.  FIFO depths (1 local-to-global, 4 global-to-local),
// lanes, the Swap Rule and the observers follow the paper; the FIFO-per-
// ejector organisation follows its bridge drawing; the lane choice, the
// arbitration order and applying the swap only to flits that would
// otherwise be deflected are this design's choices.
module hird_bridge_router
  import hird_pkg::*;
#(
  parameter int RING        = 0,
  parameter int SIDE        = 0,
  parameter int LANES       = 2,
  parameter int L2G_DEPTH   = 1,
  parameter int G2L_DEPTH   = 4,
  parameter int INJ_THRESH  = 100,
  parameter int XFER_THRESH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t l_in  [2],
  output flit_t l_out [2],
  input  flit_t g_in  [LANES][2],
  output flit_t g_out [LANES][2],
  output logic  local_starve,
  output logic  global_starve,
  output logic  evt_deflect,
  output logic  evt_swap,
  output logic  evt_reserve
);

  localparam int LPOS = bridge_local_pos(SIDE);
  localparam int GPOS = bridge_global_pos(RING, SIDE);
  localparam int NG   = 2 * LANES;
  localparam int GW   = (NG > 1) ? $clog2(NG) : 1;

  // flatten the global interfaces: g = 2*lane + d
  flit_t gi [NG];
  for (genvar l = 0; l < LANES; l++) begin : g_flat
    for (genvar d = 0; d < 2; d++) begin : g_d
      assign gi[2*l+d] = g_in[l][d];
    end
  end

  // ---------------- transfer requests ----------------
  logic l_want [2], l_allow [2], l_acc [2], l_taken [2], l_res_evt [2];
  logic g_want [NG], g_allow [NG], g_acc [NG], g_taken [NG], g_res_evt [NG];
  logic l2g_full [2], l2g_empty [2], l2g_deq [2];
  logic g2l_full [NG], g2l_empty [NG], g2l_deq [NG];
  flit_t l2g_head [2], g2l_head [NG];
  dir_e  l2g_dir [2], g2l_dir [NG];
  logic  unused_res_l [2], unused_res_g [NG];

  for (genvar d = 0; d < 2; d++) begin : g_lside
    dir_e unused_dir;
    logic unused_exit;
    hird_route #(.LEVEL(LVL_BRIDGE_LOCAL), .RING(RING), .POS(LPOS)) u_route (
      .flit(l_in[d]), .exit_here(l_want[d]), .inj_dir(unused_dir));
    assign l_acc[d] = l_want[d] && l_allow[d] && !l2g_full[d];

    hird_observer #(.RING_LEN(LOCAL_LOOP), .THRESH(XFER_THRESH)) u_obs (
      .clk, .rst_n, .in_flit(l_in[d]), .wants(l_want[d]), .taken(l_taken[d]),
      .allow(l_allow[d]), .reserving(unused_res_l[d]), .evt_reserve(l_res_evt[d]));

    hird_fifo #(.DEPTH(L2G_DEPTH)) u_l2g (
      .clk, .rst_n, .enq(l_acc[d]), .din(l_in[d]), .deq(l2g_deq[d]),
      .dout(l2g_head[d]), .empty(l2g_empty[d]), .full(l2g_full[d]));

    // direction on the global ring for this FIFO's head
    hird_route #(.LEVEL(LVL_BRIDGE_GLOBAL), .RING(RING), .POS(GPOS)) u_hroute (
      .flit(l2g_head[d]), .exit_here(unused_exit), .inj_dir(l2g_dir[d]));
  end

  for (genvar g = 0; g < NG; g++) begin : g_gside
    dir_e unused_dir;
    logic unused_exit;
    hird_route #(.LEVEL(LVL_BRIDGE_GLOBAL), .RING(RING), .POS(GPOS)) u_route (
      .flit(gi[g]), .exit_here(g_want[g]), .inj_dir(unused_dir));
    assign g_acc[g] = g_want[g] && g_allow[g] && !g2l_full[g];

    hird_observer #(.RING_LEN(GLOBAL_LOOP), .THRESH(XFER_THRESH)) u_obs (
      .clk, .rst_n, .in_flit(gi[g]), .wants(g_want[g]), .taken(g_taken[g]),
      .allow(g_allow[g]), .reserving(unused_res_g[g]), .evt_reserve(g_res_evt[g]));

    hird_fifo #(.DEPTH(G2L_DEPTH)) u_g2l (
      .clk, .rst_n, .enq(g_acc[g]), .din(gi[g]), .deq(g2l_deq[g]),
      .dout(g2l_head[g]), .empty(g2l_empty[g]), .full(g2l_full[g]));

    // direction on the local ring for this FIFO's head
    hird_route #(.LEVEL(LVL_BRIDGE_LOCAL), .RING(RING), .POS(LPOS)) u_hroute (
      .flit(g2l_head[g]), .exit_here(unused_exit), .inj_dir(g2l_dir[g]));
  end

  // ---------------- Swap Rule ----------------
  logic          swap;
  logic          ls;           // local direction of the swapped flit
  logic [GW-1:0] gs;           // global interface of the swapped flit
  always_comb begin
    logic lf, gf;
    lf = 1'b0; gf = 1'b0; ls = 1'b0; gs = '0;
    for (int d = 0; d < 2; d++)
      if (!lf && l_want[d] && !l_acc[d]) begin lf = 1'b1; ls = d[0]; end
    for (int g = 0; g < NG; g++)
      if (!gf && g_want[g] && !g_acc[g]) begin gf = 1'b1; gs = GW'(g); end
    swap = lf && gf;
  end

  for (genvar d = 0; d < 2; d++) begin : g_ltaken
    assign l_taken[d] = l_acc[d] || (swap && ls == d[0]);
  end
  for (genvar g = 0; g < NG; g++) begin : g_gtaken
    assign g_taken[g] = g_acc[g] || (swap && gs == GW'(g));
  end

  // ---------------- injection crossbars ----------------
  logic          l_free [2];
  logic          g_free [NG];
  logic [GW-1:0] rr_g2l [2];   // round-robin pointer per local output
  logic          l_grant [2];
  logic [GW-1:0] l_grant_src [2];
  logic          l2g_prio;
  logic          g_grant [NG];
  logic          g_grant_src [NG];

  always_comb begin
    for (int d = 0; d < 2; d++)
      l_free[d] = (!l_in[d].valid || l_acc[d]) && !(swap && ls == d[0]);
    for (int g = 0; g < NG; g++)
      g_free[g] = (!gi[g].valid || g_acc[g]) && !(swap && gs == GW'(g));
  end

  // global-to-local: per local output, round-robin over the FIFO heads
  always_comb begin
    int h;
    h = 0;
    for (int i = 0; i < NG; i++) g2l_deq[i] = 1'b0;
    for (int d = 0; d < 2; d++) begin
      l_grant[d]     = 1'b0;
      l_grant_src[d] = '0;
      if (l_free[d]) begin
        for (int k = 0; k < NG; k++) begin
          h = (int'(rr_g2l[d]) + k) % NG;
          if (!l_grant[d] && !g2l_empty[h] && g2l_dir[h] == dir_e'(d)) begin
            l_grant[d]     = 1'b1;
            l_grant_src[d] = GW'(h);
            g2l_deq[h]     = 1'b1;
          end
        end
      end
    end
  end

  // local-to-global: each head takes the lowest free lane of its direction
  always_comb begin
    logic claimed [NG];
    int   h, g;
    h = 0;
    g = 0;
    for (int i = 0; i < NG; i++) begin
      claimed[i]     = 1'b0;
      g_grant[i]     = 1'b0;
      g_grant_src[i] = 1'b0;
    end
    for (int i = 0; i < 2; i++) l2g_deq[i] = 1'b0;
    for (int k = 0; k < 2; k++) begin
      h = k ^ int'(l2g_prio);
      if (!l2g_empty[h]) begin
        for (int l = 0; l < LANES; l++) begin
          g = 2 * l + int'(l2g_dir[h]);
          if (!l2g_deq[h] && g_free[g] && !claimed[g]) begin
            claimed[g]     = 1'b1;
            g_grant[g]     = 1'b1;
            g_grant_src[g] = h[0];
            l2g_deq[h]     = 1'b1;
          end
        end
      end
    end
  end

  // ---------------- router pipeline registers ----------------
  flit_t go [NG];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < 2; d++) begin
        l_out[d]  <= '0;
        rr_g2l[d] <= '0;
      end
      for (int g = 0; g < NG; g++) go[g] <= '0;
      l2g_prio <= 1'b0;
    end else begin
      for (int d = 0; d < 2; d++) begin
        if (l_grant[d]) begin
          l_out[d]  <= g2l_head[l_grant_src[d]];
          rr_g2l[d] <= (int'(l_grant_src[d]) == NG - 1) ? '0 : l_grant_src[d] + 1'b1;
        end else if (swap && ls == d[0]) l_out[d] <= gi[gs];
        else if (l_taken[d])             l_out[d] <= '0;
        else                             l_out[d] <= l_in[d];
      end
      for (int g = 0; g < NG; g++) begin
        if (g_grant[g])                      go[g] <= l2g_head[g_grant_src[g]];
        else if (swap && gs == GW'(g))       go[g] <= l_in[ls];
        else if (g_taken[g])                 go[g] <= '0;
        else                                 go[g] <= gi[g];
      end
      if (l2g_deq[0] || l2g_deq[1]) l2g_prio <= ~l2g_prio;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_unflat
    for (genvar d = 0; d < 2; d++) begin : g_d
      assign g_out[l][d] = go[2*l+d];
    end
  end

  // ---------------- starvation (injection guarantee) ----------------
  logic g2l_starved [NG], l2g_starved [2];
  for (genvar g = 0; g < NG; g++) begin : g_g2l_sc
    hird_starve_ctr #(.THRESH(INJ_THRESH)) u_sc (
      .clk, .rst_n, .waiting(!g2l_empty[g]), .injected(g2l_deq[g]), .hold(1'b0),
      .starved(g2l_starved[g]));
  end
  for (genvar d = 0; d < 2; d++) begin : g_l2g_sc
    hird_starve_ctr #(.THRESH(INJ_THRESH)) u_sc (
      .clk, .rst_n, .waiting(!l2g_empty[d]), .injected(l2g_deq[d]), .hold(1'b0),
      .starved(l2g_starved[d]));
  end

  always_comb begin
    local_starve  = 1'b0;
    global_starve = l2g_starved[0] || l2g_starved[1];
    evt_deflect   = 1'b0;
    evt_reserve   = l_res_evt[0] || l_res_evt[1];
    for (int g = 0; g < NG; g++) begin
      local_starve = local_starve || g2l_starved[g];
      evt_deflect  = evt_deflect || (g_want[g] && !g_taken[g]);
      evt_reserve  = evt_reserve || g_res_evt[g];
    end
    for (int d = 0; d < 2; d++) evt_deflect = evt_deflect || (l_want[d] && !l_taken[d]);
  end
  assign evt_swap = swap;

  // a transfer never drops a flit: every wanting flit is taken or stays
  a_one_swap_pair: assert property (@(posedge clk) disable iff (!rst_n)
    swap |-> (l_want[ls] && g_want[gs]));

endmodule
