// tb_hird_observer -- transfer-guarantee observer on a 4-slot ring with a
// retry threshold of 2.  A flit A sits in slot 0 wanting a transfer that
// never succeeds; B sits in slot 1 and also wants it.  Worked by hand:
// A is recorded at cycle 0, seen again at 4 and 8; at 8 the reservation
// starts.  Until A is taken (at 12) B is refused; after that the reservation
// is released, the watch moves to slot 1, and B is recorded at 13 and
// reserved for at 21.  A random phase then checks that a reservation always
// ends once its flit is taken.
module tb_hird_observer;
  import hird_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t in_flit;
  logic  wants, taken, allow, reserving, evt_reserve;
  int    cyc;

  hird_observer #(.RING_LEN(4), .THRESH(2)) dut (
    .clk, .rst_n, .in_flit, .wants, .taken, .allow, .reserving, .evt_reserve);

  flit_t A, B;
  int    n_evt;
  int    evt_at [$];

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at cycle %0d", w, cyc); end
  endtask

  always @(posedge clk) if (rst_n && evt_reserve) evt_at.push_back(cyc);

  initial begin
    A = '0; A.valid = 1; A.src = '{ring: 2'd1, node: 2'd2}; A.tag = 8'h11; A.dst = '{ring: 2'd3, node: 2'd0};
    B = '0; B.valid = 1; B.src = '{ring: 2'd1, node: 2'd3}; B.tag = 8'h22; B.dst = '{ring: 2'd2, node: 2'd1};
    in_flit = '0; wants = 0; taken = 0; cyc = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // cycle numbering: cycle k = k-th clock after reset release, slot = k % 4
    for (cyc = 0; cyc < 30; cyc++) begin
      case (cyc % 4)
        0: in_flit = (cyc <= 12) ? A : '0;
        1: in_flit = B;
        default: in_flit = '0;
      endcase
      wants = in_flit.valid;
      taken = (cyc == 12) || (cyc == 25 && in_flit == B);
      #1;
      if (cyc >= 9 && cyc < 12) chk("reserved: others refused", !(cyc % 4 == 1) || !allow);
      if (cyc == 12) chk("reserved flit allowed", allow);
      if (cyc == 12) chk("reservation active before take", reserving);
      if (cyc == 13) chk("released after take", !reserving && allow);
      if (cyc == 5)  chk("B allowed before any reservation", allow);
      @(posedge clk);
      #1;
      @(negedge clk);
    end
    chk("two reservations", evt_at.size() == 2);
    if (evt_at.size() == 2) begin
      chk("first reservation at cycle 8", evt_at[0] == 8);
      chk("second reservation at cycle 21", evt_at[1] == 21);
    end
    chk("released after B taken", !reserving);
    // random phase: a reserved flit that is taken always ends the reservation
    for (int i = 0; i < 3000; i++) begin
      logic was;
      in_flit = '0;
      if ($urandom % 2) begin
        in_flit.valid = 1; in_flit.src = 4'($urandom % 3); in_flit.tag = 8'($urandom % 2);
        in_flit.dst = 4'hF;
      end
      wants = in_flit.valid && ($urandom % 4 != 0);
      taken = wants && allow && ($urandom % 3 == 0);
      #1;
      chk("random: allow unless reserving", reserving || allow);
      was = reserving && taken && allow && dut.observe;
      @(posedge clk); #1;
      if (was) chk("random: release on take", !reserving);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
