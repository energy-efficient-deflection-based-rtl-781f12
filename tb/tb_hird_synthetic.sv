// tb_hird_synthetic -- synthetic-traffic sweeps on the 16-node network at
// its default parameters: uniform random, transpose and bit complement,
// each at offered loads of 5%, 20% and 50% (percent chance per node and
// cycle of offering a new flit).  Uniform random is also run at 3%, 18%,
// 32% and 47%: the mean injection rates (0.03, 0.18, 0.32, 0.47
// flits/node/cycle) of the low, medium-low, medium and high intensity
// multiprogrammed workload classes, whose traffic is spread over all
// nodes by cache-block interleaving.  Node n has coordinates x = n % 4,
// y = n / 4; transpose sends (x,y) to (y,x) (diagonal nodes stay silent),
// bit complement sends n to ~n.  For every point the bench measures the
// accepted throughput (flits/node/cycle) and the mean latency from the
// injection handshake to ejection, prints them, and checks that every flit
// arrives exactly once at its destination, that the network drains, that
// mean latency does not fall as load rises, and that under uniform random
// traffic at least 90% of the offered load is accepted (the network is not
// saturated at any of these rates).
module tb_hird_synthetic;
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

  flit_t  sb  [int];
  longint t_in [int];
  int     next_id = 1;
  longint cyc = 0;
  longint lat_sum = 0;
  int     n_del = 0, n_inj = 0;
  logic   pending [NUM_NODES];
  int     pattern = 0, rate = 0;   // pattern: 0 UR, 1 transpose, 2 bit complement
  logic   gen = 0;

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", w, cyc); end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    #2;
    for (int n = 0; n < NUM_NODES; n++)
      for (int d = 0; d < 2; d++) if (ej_valid[n][d]) begin
        int k;
        k = int'(ej_flit[n][d].payload[31:0]);
        chk("known flit", sb.exists(k));
        if (sb.exists(k)) begin
          chk("right node", {ej_flit[n][d].dst.ring, ej_flit[n][d].dst.node} == 4'(n));
          chk("unchanged", ej_flit[n][d] == sb[k]);
          lat_sum += cyc - t_in[k];
          n_del++;
          sb.delete(k);
          t_in.delete(k);
        end
      end
  end

  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < NUM_NODES; n++)
      if (inj_valid[n] && inj_ready[n]) begin
        flit_t f;
        f = inj_flit[n];
        f.valid = 1'b1;
        f.src = '{ring: RING_W'(n / 4), node: NODE_W'(n % 4)};
        sb[int'(f.payload[31:0])] = f;
        t_in[int'(f.payload[31:0])] = cyc;
        n_inj++;
        pending[n] = 1'b0;
      end
  end

  function automatic int dst_of(int n);
    int d;
    case (pattern)
      1: return ((n % 4) * 4 + n / 4 == n) ? -1 : (n % 4) * 4 + n / 4;
      2: return 15 - n;
      default: begin
        do d = int'($urandom % NUM_NODES); while (d == n);
        return d;
      end
    endcase
  endfunction

  always @(negedge clk) if (rst_n) begin
    for (int n = 0; n < NUM_NODES; n++) begin
      if (gen && !pending[n] && int'($urandom % 100) < rate) begin
        int d;
        d = dst_of(n);
        if (d >= 0) begin
          inj_flit[n] = '0;
          inj_flit[n].dst = '{ring: RING_W'(d / 4), node: NODE_W'(d % 4)};
          inj_flit[n].tag = TAG_W'(next_id);
          inj_flit[n].payload = PAYLOAD_W'(next_id);
          next_id++;
          pending[n] = 1'b1;
        end
      end
      inj_valid[n] = pending[n];
    end
  end

  string pname [3] = '{"uniform random", "transpose", "bit complement"};
  int    rates [3][7] = '{'{3, 5, 18, 20, 32, 47, 50}, '{5, 20, 50, 0, 0, 0, 0},
                            '{5, 20, 50, 0, 0, 0, 0}};
  real   prev_lat, lat, thr;

  initial begin
    for (int n = 0; n < NUM_NODES; n++) begin inj_valid[n] = 0; inj_flit[n] = '0; pending[n] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int p = 0; p < 3; p++) begin
      prev_lat = 0.0;
      for (int r = 0; r < 7; r++) begin
        if (rates[p][r] == 0) break;
        pattern = p; rate = rates[p][r];
        lat_sum = 0; n_del = 0;
        gen = 1;
        repeat (3000) @(posedge clk);
        gen = 0;
        repeat (20000) begin
          @(posedge clk);
          if (sb.size() == 0 && !pending.or()) break;
        end
        repeat (5) @(posedge clk);
        chk($sformatf("%s %0d%%: drained", pname[p], rates[p][r]), sb.size() == 0);
        lat = (n_del > 0) ? real'(lat_sum) / real'(n_del) : 0.0;
        thr = real'(n_del) / (3000.0 * 16.0);
        $display("%-15s offered %2d%%: throughput %0.3f flits/node/cycle, mean latency %0.1f cycles",
                 pname[p], rates[p][r], thr, lat);
        chk($sformatf("%s %0d%%: flits delivered", pname[p], rates[p][r]), n_del > 0);
        chk($sformatf("%s %0d%%: latency does not fall with load", pname[p], rates[p][r]),
            lat + 0.5 >= prev_lat);
        if (p == 0)
          chk($sformatf("uniform %0d%%: offered load sustained", rates[p][r]),
              thr * 100.0 >= 0.9 * real'(rates[p][r]));
        prev_lat = lat;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
