// tb_hird_throttle_ctrl -- a 3-member controller with an escalation
// threshold of 5.  When member 1 starves, members 0 and 2 are throttled
// one cycle later and member 1 is not; escalation rises after 5 further
// cycles of starvation; everything releases one cycle after starvation
// ends; an external throttle throttles every non-starved member.
module tb_hird_throttle_ctrl;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] starve, throttle;
  logic       ext, active, escalate;
  int         esc_cycle;

  hird_throttle_ctrl #(.N(3), .ESC_THRESH(5)) dut (
    .clk, .rst_n, .starve, .ext_throttle(ext), .throttle, .active, .escalate);

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  initial begin
    starve = 0; ext = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk) chk("idle", throttle == 0 && !active && !escalate);
    starve = 3'b010;
    esc_cycle = -1;
    for (int k = 1; k <= 10; k++) begin
      @(negedge clk);
      chk("throttle others", throttle == 3'b101);
      chk("active", active);
      if (escalate && esc_cycle < 0) esc_cycle = k;
    end
    chk("escalate after 5 cycles + 1 register", esc_cycle == 6);
    starve = 0;
    @(negedge clk);
    chk("released", throttle == 0 && !active && !escalate);
    ext = 1;
    @(negedge clk);
    chk("ext throttles all", throttle == 3'b111 && !active);
    starve = 3'b100;
    @(negedge clk);
    chk("ext spares the starved", throttle == 3'b011);
    ext = 0; starve = 0;
    @(negedge clk);
    chk("all clear", throttle == 0);
    // random against a model
    for (int i = 0; i < 2000; i++) begin
      logic [2:0] s; logic e;
      s = 3'($urandom) & {3{$urandom % 4 == 0}};
      e = ($urandom % 6 == 0);
      starve = s; ext = e;
      @(negedge clk);
      chk("random", throttle == ((|s || e) ? ~s : 3'b000) && active == |s);
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
