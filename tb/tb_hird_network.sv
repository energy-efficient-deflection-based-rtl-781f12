// tb_hird_network -- end-to-end test of the 16-node HiRD network at its
// default parameters.
//   1. Latency on an empty network, worked by hand from the per-hop
//      latencies: node 0 -> node 1 (one local hop) is seen at the ejection
//      output 4 clock edges after the injection handshake; node 0 of ring 0
//      -> node 0 of ring 1 (local hop, transfer, two global hops, transfer,
//      local hop) after 14.
//   2. Uniform random traffic near saturation.
//   3. The paper's worst-case pattern: rings A, B, C with adjacent bridges
//      on the global ring (rings 0, 1, 3); A sends only to C, C only to A,
//      and B only to ring 2, every node injecting whenever it can.  Without
//      the guarantees ring B would be shut out of the global ring; the test
//      requires that ring B's nodes get flits delivered.
//   4. Drain: no new traffic; every injected flit must arrive.
// A scoreboard checks that every flit is delivered exactly once, to the
// right node, unchanged.  Each mechanism must occur at least once:
// transfer deflection, Swap Rule, transfer reservation, ring throttling,
// global throttling, two ejections at one node in one cycle, and
// injection back-pressure.
module tb_hird_network;
  import hird_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  inj_valid [NUM_NODES], inj_ready [NUM_NODES];
  flit_t inj_flit  [NUM_NODES];
  logic  ej_valid  [NUM_NODES][2];
  flit_t ej_flit   [NUM_NODES][2];
  logic [NUM_RINGS-1:0]   ring_throttle;
  logic                   global_throttle;
  logic [NUM_BRIDGES-1:0] evt_deflect, evt_swap, evt_reserve;

  hird_network dut (
    .clk, .rst_n, .inj_valid, .inj_flit, .inj_ready, .ej_valid, .ej_flit,
    .ring_throttle, .global_throttle, .evt_deflect, .evt_swap, .evt_reserve);

  // ---------------- scoreboard ----------------
  flit_t sb [int];             // key: unique id carried in payload[31:0]
  int    next_id = 1;
  int    delivered = 0, injected = 0;
  int    delivered_from_ring [NUM_RINGS];
  longint cyc = 0;
  int    last_eject_cycle = 0;

  // mechanism counters
  int n_defl = 0, n_swap = 0, n_res = 0, n_rthr = 0, n_gthr = 0, n_dual = 0, n_bp = 0;

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", w, cyc);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int b = 0; b < NUM_BRIDGES; b++) begin
      n_defl += int'(evt_deflect[b]);
      n_swap += int'(evt_swap[b]);
      n_res  += int'(evt_reserve[b]);
    end
    n_rthr += int'(|ring_throttle);
    n_gthr += int'(global_throttle);
  end

  // ejection check (outputs are registered: sample just after the edge)
  always @(posedge clk) if (rst_n) begin
    #2;
    for (int n = 0; n < NUM_NODES; n++) begin
      if (ej_valid[n][0] && ej_valid[n][1]) n_dual++;
      for (int d = 0; d < 2; d++) if (ej_valid[n][d]) begin
        flit_t f;
        int    k;
        f = ej_flit[n][d];
        k = int'(f.payload[31:0]);
        chk("ejected flit is known", sb.exists(k));
        if (sb.exists(k)) begin
          chk("ejected at its destination", {f.dst.ring, f.dst.node} == 4'(n));
          chk("flit unchanged", f == sb[k]);
          delivered_from_ring[int'(f.src.ring)]++;
          sb.delete(k);
        end
        delivered++;
        last_eject_cycle = int'(cyc);
      end
    end
  end

  // ---------------- traffic ----------------
  typedef enum {T_OFF, T_UNIFORM, T_WORST} mode_e;
  mode_e mode = T_OFF;
  int    rate_pct = 0;
  logic  pending [NUM_NODES];

  function automatic int pick_dst(int src);
    int r, d;
    r = src / NODES_PER_RING;
    if (mode == T_WORST) begin
      case (r)
        0: return 3 * NODES_PER_RING + int'($urandom % 4);   // A -> C
        3: return int'($urandom % 4);                       // C -> A
        1: return 2 * NODES_PER_RING + int'($urandom % 4);  // B -> ring 2
        default: return -1;                                 // ring 2 silent
      endcase
    end
    do d = int'($urandom % NUM_NODES); while (d == src);
    return d;
  endfunction

  // handshake: an offer stays until accepted
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NUM_NODES; n++) begin
      if (inj_valid[n] && !inj_ready[n]) n_bp++;
      if (inj_valid[n] && inj_ready[n]) begin
        flit_t f;
        f = inj_flit[n];
        f.valid = 1'b1;
        f.src   = '{ring: RING_W'(n / NODES_PER_RING), node: NODE_W'(n % NODES_PER_RING)};
        sb[int'(f.payload[31:0])] = f;
        injected++;
        pending[n] = 1'b0;
      end
    end
  end

  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < NUM_NODES; n++) begin
      if (!pending[n] && mode != T_OFF && (int'($urandom % 100) < rate_pct)) begin
        int d;
        d = pick_dst(n);
        if (d >= 0) begin
          inj_flit[n] = '0;
          inj_flit[n].dst = '{ring: RING_W'(d / NODES_PER_RING), node: NODE_W'(d % NODES_PER_RING)};
          inj_flit[n].tag = TAG_W'(next_id);
          inj_flit[n].payload = {PAYLOAD_W'($urandom) << 32} | PAYLOAD_W'(next_id);
          next_id++;
          pending[n] = 1'b1;
        end
      end
      inj_valid[n] = pending[n];
    end
  end

  // one directed flit, returns edges from handshake to ejection
  task automatic latency(int src, int dst, output int edges);
    int k;
    @(negedge clk);
    inj_flit[src] = '0;
    inj_flit[src].dst = '{ring: RING_W'(dst / NODES_PER_RING), node: NODE_W'(dst % NODES_PER_RING)};
    inj_flit[src].payload = PAYLOAD_W'(next_id);
    k = next_id; next_id++;
    pending[src] = 1'b1; inj_valid[src] = 1'b1;
    @(posedge clk);          // handshake edge (edge 1)
    edges = 1;
    while (sb.exists(k) || pending[src]) begin
      @(posedge clk); #3;
      if (sb.exists(k)) edges++;
      if (edges > 200) break;
    end
    edges++;                 // the edge after which it was ejected
  endtask

  int lat;
  int b_before;

  initial begin
    for (int n = 0; n < NUM_NODES; n++) begin
      inj_valid[n] = 0; inj_flit[n] = '0; pending[n] = 0;
    end
    for (int r = 0; r < NUM_RINGS; r++) delivered_from_ring[r] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (5) @(posedge clk);

    // 1. latency
    latency(0, 1, lat);
    chk($sformatf("one local hop takes 4 edges (got %0d)", lat), lat == 4);
    repeat (10) @(posedge clk);
    latency(0, 4, lat);
    chk($sformatf("ring 0 -> ring 1 takes 14 edges (got %0d)", lat), lat == 14);
    repeat (10) @(posedge clk);

    // 2. uniform random
    mode = T_UNIFORM; rate_pct = 60;
    repeat (6000) @(posedge clk);

    // 3. worst case
    mode = T_WORST; rate_pct = 100;
    b_before = delivered_from_ring[1];
    repeat (20000) @(posedge clk);
    chk($sformatf("ring B delivers under the worst-case pattern (%0d flits)",
                  delivered_from_ring[1] - b_before), delivered_from_ring[1] - b_before > 0);

    // 4. drain
    mode = T_OFF;
    repeat (30000) begin
      @(posedge clk);
      if (sb.size() == 0 && !pending.or()) break;
    end
    repeat (50) @(posedge clk);
    chk($sformatf("all %0d injected flits delivered (%0d outstanding)", injected, sb.size()),
        sb.size() == 0);
    chk("delivered == injected", delivered == injected);

    $display("injected=%0d delivered=%0d cycles=%0d", injected, delivered, cyc);
    $display("deflections=%0d swaps=%0d reservations=%0d ring_throttle_cycles=%0d global_throttle_cycles=%0d dual_ejections=%0d backpressure=%0d",
             n_defl, n_swap, n_res, n_rthr, n_gthr, n_dual, n_bp);
    chk("transfer deflection happened", n_defl > 0);
    chk("Swap Rule happened", n_swap > 0);
    chk("transfer reservation happened", n_res > 0);
    chk("ring throttling happened", n_rthr > 0);
    chk("global throttling happened", n_gthr > 0);
    chk("dual ejection happened", n_dual > 0);
    chk("injection back-pressure happened", n_bp > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
