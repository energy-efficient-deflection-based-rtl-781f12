// tb_hird_bridge_router -- bridge of ring 0, side 1 (local position 2,
// global position 1), two global lanes, 1-entry transfer FIFOs so they fill
// quickly, starvation threshold 5.  Directed, hand-worked cycle checks of:
// local-to-global and global-to-local transfers with their direction and
// lane choice, pass-through, transfer deflection when a FIFO is full, the
// Swap Rule when both transfer FIFOs are full, starvation reporting of both
// FIFO kinds, and recovery once the rings free up.
module tb_hird_bridge_router;
  import hird_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t l_in [2], l_out [2], g_in [2][2], g_out [2][2];
  logic  local_starve, global_starve, evt_deflect, evt_swap, evt_reserve;
  int    n_defl = 0, n_swap = 0;

  hird_bridge_router #(.RING(0), .SIDE(1), .LANES(2), .L2G_DEPTH(1), .G2L_DEPTH(1),
                       .INJ_THRESH(5), .XFER_THRESH(2)) dut (
    .clk, .rst_n, .l_in, .l_out, .g_in, .g_out, .local_starve, .global_starve,
    .evt_deflect, .evt_swap, .evt_reserve);

  always @(posedge clk) if (rst_n) begin
    n_defl += int'(evt_deflect);
    n_swap += int'(evt_swap);
  end

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  int tagc = 0;
  function automatic flit_t mk(int dr, int dn);
    flit_t f = '0;
    f.valid = 1; f.dst = '{ring: 2'(dr), node: 2'(dn)}; f.src = '{ring: 2'(3), node: 2'(tagc % 4)};
    tagc++;
    f.tag = 8'(tagc); f.payload = PAYLOAD_W'({$urandom, $urandom});
    return f;
  endfunction

  task automatic clear_in();
    l_in[0] = '0; l_in[1] = '0;
    for (int l = 0; l < 2; l++) for (int d = 0; d < 2; d++) g_in[l][d] = '0;
  endtask

  // advance one clock: inputs set before, outputs sampled after the edge
  task automatic step();
    @(posedge clk); #1;
  endtask

  flit_t X, Y, Z, W, P, Q, R1, R2, S, blk0, blk1, lblk;

  initial begin
    clear_in();
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // 1. local -> global: ring 2 bridges are at global 6,7: CCW is shorter
    X = mk(2, 0); l_in[0] = X;
    step();
    chk("X left the local ring", !l_out[0].valid);
    clear_in();
    step();
    chk("X on global lane 0 CCW", g_out[0][1] == X);
    chk("X only once", !g_out[1][1].valid && !g_out[0][0].valid);

    // 2. global -> local: node 1 (position 1) is one step CCW from position 2
    Y = mk(0, 1); g_in[1][0] = Y;
    step();
    chk("Y left the global ring", !g_out[1][0].valid);
    clear_in();
    step();
    chk("Y on local CCW", l_out[1] == Y && !l_out[0].valid);

    // 3. pass-through on both rings
    Z = mk(3, 0); W = mk(0, 3);
    g_in[0][0] = Z; l_in[1] = W;
    step();
    chk("global pass-through", g_out[0][0] == Z);
    chk("local pass-through", l_out[1] == W);
    chk("no deflection counted for passing flits", n_defl == 0);
    clear_in();

    // 4. block both CCW global lanes; P enters the L2G FIFO and waits
    blk0 = mk(3, 1); blk1 = mk(3, 2);
    g_in[0][1] = blk0; g_in[1][1] = blk1;
    P = mk(2, 1); l_in[0] = P;
    step();
    chk("P accepted", !l_out[0].valid);
    Q = mk(2, 2); l_in[0] = Q;
    step();
    chk("P cannot inject: both CCW lanes busy", g_out[0][1] == blk0 && g_out[1][1] == blk1);
    chk("Q deflected: stays on the local ring", l_out[0] == Q);
    chk("deflection counted", n_defl == 1);

    // 5. fill the G2L FIFO (g = 0) with R1 while the local CCW ring is busy
    lblk = mk(0, 0);
    l_in[0] = '0; l_in[1] = lblk;
    R1 = mk(0, 0); g_in[0][0] = R1;    // node 0 is CCW from position 2
    step();
    chk("R1 accepted", !g_out[0][0].valid);
    // both FIFOs now full: a local and a global flit that both want to
    // transfer must swap
    R2 = mk(0, 2); S = mk(1, 3);
    g_in[0][0] = R2; l_in[0] = S;
    step();
    chk("swap: S takes R2's global slot", g_out[0][0] == S);
    chk("swap: R2 takes S's local slot", l_out[0] == R2);
    chk("swap counted", n_swap == 1);
    chk("no deflection in a swap", n_defl == 1);
    g_in[0][0] = '0; l_in[0] = '0;

    // 6. keep both blocked: starvation flags after 5 waiting cycles
    repeat (4) step();
    chk("both starved", global_starve && local_starve);

    // 7. free the rings: P goes out on lane 0 CCW, R1 on local CCW
    clear_in();
    step();
    chk("P injected", g_out[0][1] == P);
    chk("R1 injected", l_out[1] == R1);
    step();
    chk("starvation cleared", !global_starve && !local_starve);
    chk("nothing else emitted", !g_out[0][1].valid && !l_out[1].valid);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
