// tb_hird_starve_ctr -- starvation must be flagged after exactly THRESH
// waiting cycles, not advance while held, and clear on an injection; a
// random phase compares against a counter model.
module tb_hird_starve_ctr;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int T = 7;
  logic waiting, injected, hold, starved;
  int   model;

  hird_starve_ctr #(.THRESH(T)) dut (.clk, .rst_n, .waiting, .injected, .hold, .starved);

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  initial begin
    waiting = 0; injected = 0; hold = 0; model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: T-1 waiting cycles -> not yet starved, T -> starved
    @(negedge clk); waiting = 1;
    repeat (T - 1) @(posedge clk);
    #1 chk("not starved at T-1", !starved);
    // hold for 5 cycles: no progress
    @(negedge clk); hold = 1;
    repeat (5) @(posedge clk);
    #1 chk("held", !starved);
    @(negedge clk); hold = 0;
    @(posedge clk); #1 chk("starved at T", starved);
    @(negedge clk); injected = 1; waiting = 0;
    @(posedge clk); #1 chk("cleared", !starved);
    @(negedge clk); injected = 0;
    // random against a model
    model = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk("model", starved == (model == T));
      waiting  = ($urandom % 8) != 0;
      injected = ($urandom % 12) == 0;
      hold     = ($urandom % 5) == 0;
      @(posedge clk);
      if (injected) model = 0;
      else if (waiting && !hold && model != T) model++;
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
