// tb_hird_route -- checks the routing decision of node, bridge-local and
// bridge-global stops against a reference that walks the rings step by step.
// For every one of the 16 destinations it checks 'exit_here' and the chosen
// direction (shorter path, clockwise on a tie) at five stops.
module tb_hird_route;
  import hird_pkg::*;

  int checks = 0, failures = 0;

  // reference geometry, written out independently of the package
  int node_p [4]  = '{0, 1, 3, 4};
  int brl_p  [2]  = '{5, 2};
  int brg_p  [4][2] = '{'{0, 1}, '{2, 3}, '{7, 6}, '{5, 4}};

  // steps clockwise (dir 0) or counter-clockwise (dir 1) until a target
  function automatic int steps(int from, int t0, int t1, int n, int dir);
    int p = from;
    for (int k = 0; k <= n; k++) begin
      if (p == t0 || p == t1) return k;
      p = (dir == 0) ? (p + 1) % n : (p + n - 1) % n;
    end
    return 999;
  endfunction

  function automatic int ref_dir(int from, int t0, int t1, int n);
    return (steps(from, t0, t1, n, 0) <= steps(from, t0, t1, n, 1)) ? 0 : 1;
  endfunction

  flit_t f;
  logic  ex [5];
  dir_e  dr [5];

  hird_route #(.LEVEL(LVL_NODE),          .RING(1), .POS(0)) u0 (.flit(f), .exit_here(ex[0]), .inj_dir(dr[0]));
  hird_route #(.LEVEL(LVL_NODE),          .RING(2), .POS(4)) u1 (.flit(f), .exit_here(ex[1]), .inj_dir(dr[1]));
  hird_route #(.LEVEL(LVL_BRIDGE_LOCAL),  .RING(1), .POS(2)) u2 (.flit(f), .exit_here(ex[2]), .inj_dir(dr[2]));
  hird_route #(.LEVEL(LVL_BRIDGE_LOCAL),  .RING(3), .POS(5)) u3 (.flit(f), .exit_here(ex[3]), .inj_dir(dr[3]));
  hird_route #(.LEVEL(LVL_BRIDGE_GLOBAL), .RING(3), .POS(5)) u4 (.flit(f), .exit_here(ex[4]), .inj_dir(dr[4]));

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s dst=%0d.%0d got %0d exp %0d", what, f.dst.ring, f.dst.node, got, exp);
    end
  endtask

  initial begin
    f = '0;
    for (int v = 0; v < 2; v++)
      for (int r = 0; r < 4; r++)
        for (int n = 0; n < 4; n++) begin
          int tr, tn;
          f = '0;
          f.valid = v[0];
          f.dst   = '{ring: 2'(r), node: 2'(n)};
          f.payload = PAYLOAD_W'($urandom);
          #1;
          // node ring1 pos0 (node 0)
          chk("u0 exit", int'(ex[0]), int'(v == 1 && r == 1 && n == 0));
          tn = node_p[n];
          chk("u0 dir", int'(dr[0]), (r == 1) ? ref_dir(0, tn, tn, 6) : ref_dir(0, 5, 2, 6));
          // node ring2 pos4 (node 3)
          chk("u1 exit", int'(ex[1]), int'(v == 1 && r == 2 && n == 3));
          chk("u1 dir", int'(dr[1]), (r == 2) ? ref_dir(4, tn, tn, 6) : ref_dir(4, 5, 2, 6));
          // bridge local side, ring1 pos2
          chk("u2 exit", int'(ex[2]), int'(v == 1 && r != 1));
          chk("u2 dir", int'(dr[2]), (r == 1) ? ref_dir(2, tn, tn, 6) : ref_dir(2, 5, 2, 6));
          chk("u3 exit", int'(ex[3]), int'(v == 1 && r != 3));
          chk("u3 dir", int'(dr[3]), (r == 3) ? ref_dir(5, tn, tn, 6) : ref_dir(5, 5, 2, 6));
          // bridge global side of ring 3 at global position 5
          chk("u4 exit", int'(ex[4]), int'(v == 1 && r == 3));
          tr = r;
          chk("u4 dir", int'(dr[4]), ref_dir(5, brg_p[tr][0], brg_p[tr][1], 8));
        end
    // a few hand-worked cases
    f = '0; f.valid = 1'b1;
    f.dst = '{ring: 2'd2, node: 2'd0}; #1;
    chk("gpos5->ring2 (gpos 6/7) is CW", int'(dr[4]), 0);
    f.dst = '{ring: 2'd0, node: 2'd0}; #1;
    chk("gpos5->ring0 (gpos 0/1) is CCW-equal? cw 3 ccw 4 -> CW", int'(dr[4]), 0);
    f.dst = '{ring: 2'd1, node: 2'd3}; #1;
    chk("pos0 -> node3 (pos4) is CCW", int'(dr[0]), 1);
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
