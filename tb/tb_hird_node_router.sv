// tb_hird_node_router -- node router 2 of ring 1 (ring position 3) driven
// directly on its ring inputs.  Checks, cycle by cycle against hand-worked
// expectations: ejection of locally addressed flits in both directions in
// the same cycle, pass-through of other flits, injection only into free
// slots (including one freed by an ejection), the direction choice, the
// 2-cycle offer-to-ring latency, throttling, and the starvation flag after
// INJ_THRESH blocked cycles.
module tb_hird_node_router;
  import hird_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t ring_in [2], ring_out [2], ej_flit [2], inj_flit;
  logic  ej_valid [2], inj_valid, inj_ready, throttle, starve;

  hird_node_router #(.RING(1), .NODE(2), .INJ_DEPTH(2), .INJ_THRESH(6)) dut (
    .clk, .rst_n, .ring_in, .ring_out, .inj_valid, .inj_flit, .inj_ready,
    .ej_valid, .ej_flit, .throttle, .starve);

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  function automatic flit_t mk(int dr, int dn, int sr, int sn, int tag);
    flit_t f = '0;
    f.valid = 1; f.dst = '{ring: 2'(dr), node: 2'(dn)}; f.src = '{ring: 2'(sr), node: 2'(sn)};
    f.tag = 8'(tag); f.payload = PAYLOAD_W'({$urandom, $urandom});
    return f;
  endfunction

  flit_t a, b, c, n1, n2;

  initial begin
    ring_in[0] = '0; ring_in[1] = '0; inj_valid = 0; inj_flit = '0; throttle = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // 1. two local flits, one per direction, eject together; a third passes
    a = mk(1, 2, 0, 0, 1); b = mk(1, 2, 3, 1, 2);
    ring_in[0] = a; ring_in[1] = b;
    @(posedge clk); #1;
    chk("eject cw",  ej_valid[0] && ej_flit[0] == a);
    chk("eject ccw", ej_valid[1] && ej_flit[1] == b);
    chk("ejected slots empty", !ring_out[0].valid && !ring_out[1].valid);
    @(negedge clk);
    c = mk(2, 2, 1, 0, 3);
    ring_in[0] = c; ring_in[1] = '0;
    @(posedge clk); #1;
    chk("pass-through", ring_out[0] == c && !ej_valid[0]);

    // 2. inject with the ring busy on CW: offer a flit for node 3 (pos 4,
    //    one hop clockwise from pos 3)
    @(negedge clk);
    n1 = '0; n1.dst = '{ring: 2'd1, node: 2'd3}; n1.tag = 8'h40; n1.payload = 47'h1234;
    inj_flit = n1; inj_valid = 1;
    chk("ready", inj_ready);
    @(posedge clk);                       // queued
    @(negedge clk); inj_valid = 0;
    ring_in[0] = c;                       // slot occupied: must not inject
    @(posedge clk); #1;
    chk("no injection into an occupied slot", ring_out[0] == c);
    @(negedge clk);
    a = mk(1, 2, 2, 0, 5);
    ring_in[0] = a;                       // local flit: ejected, slot freed
    @(posedge clk); #1;
    chk("injection into slot freed by ejection", ring_out[0].valid && ring_out[0].tag == 8'h40
        && ring_out[0].src == '{ring: 2'd1, node: 2'd2} && ring_out[0].payload == 47'h1234);
    chk("and the ejection happened", ej_valid[0] && ej_flit[0] == a);

    // 3. latency on an empty ring, counter-clockwise choice: node 0 (pos 0)
    //    is 3 steps either way -> clockwise; node 1 (pos 1) is 2 CCW -> CCW
    @(negedge clk);
    ring_in[0] = '0; ring_in[1] = '0;
    n2 = '0; n2.dst = '{ring: 2'd1, node: 2'd1}; n2.tag = 8'h41;
    inj_flit = n2; inj_valid = 1;         // offered in cycle t
    @(posedge clk); @(negedge clk); inj_valid = 0;
    chk("not yet on ring at t+1", !ring_out[1].valid);
    @(posedge clk); #1;                   // t+2
    chk("on CCW ring at t+2", ring_out[1].valid && ring_out[1].tag == 8'h41 && !ring_out[0].valid);
    @(negedge clk);
    n2.dst = '{ring: 2'd1, node: 2'd0}; n2.tag = 8'h42;
    inj_flit = n2; inj_valid = 1;
    @(posedge clk); @(negedge clk); inj_valid = 0;
    @(posedge clk); #1;
    chk("tie goes clockwise", ring_out[0].valid && ring_out[0].tag == 8'h42);
    // other ring: nearest bridge from pos 3 is pos 2 (1 step CCW)
    @(negedge clk);
    n2.dst = '{ring: 2'd3, node: 2'd0}; n2.tag = 8'h43;
    inj_flit = n2; inj_valid = 1;
    @(posedge clk); @(negedge clk); inj_valid = 0;
    @(posedge clk); #1;
    chk("off-ring flit to nearer bridge (CCW)", ring_out[1].valid && ring_out[1].tag == 8'h43);

    // 4. throttle blocks injection; starvation after 6 blocked cycles
    @(negedge clk);
    throttle = 1;
    n2.dst = '{ring: 2'd1, node: 2'd3}; n2.tag = 8'h44;
    inj_flit = n2; inj_valid = 1;
    @(posedge clk); @(negedge clk); inj_valid = 0;
    repeat (4) begin
      @(posedge clk); #1;
      chk("throttled: no injection", !ring_out[0].valid);
      @(negedge clk);
    end
    throttle = 0;
    ring_in[0] = c;                       // keep the slot busy
    repeat (5) @(posedge clk);
    #1 chk("not starved after 5 blocked cycles", !starve);
    @(posedge clk); #1;
    chk("starved after 6 blocked cycles", starve);
    @(negedge clk) ring_in[0] = '0;
    @(posedge clk); #1;
    chk("injected when the slot frees", ring_out[0].valid && ring_out[0].tag == 8'h44);
    @(posedge clk); #1;
    chk("starvation cleared", !starve);

    // 5. FIFO full -> not ready (depth 2, CW blocked)
    @(negedge clk);
    ring_in[0] = c;
    n2.dst = '{ring: 2'd1, node: 2'd3};
    inj_flit = n2; inj_valid = 1;
    @(posedge clk); @(negedge clk);
    @(posedge clk); @(negedge clk);
    chk("not ready when the FIFO is full", !inj_ready);
    n2.dst = '{ring: 2'd1, node: 2'd1};
    inj_flit = n2;
    #1 chk("other direction still ready", inj_ready);
    inj_valid = 0;

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
