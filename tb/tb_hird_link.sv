// tb_hird_link -- a 1-stage and a 2-stage link must deliver every input
// word exactly 1 and 2 cycles later (the 2- and 3-cycle ring hops), and
// come out of reset empty.
module tb_hird_link;
  import hird_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t din, o1, o2;
  flit_t hist [$];

  hird_link #(.LAT(1)) u1 (.clk, .rst_n, .din, .dout(o1));
  hird_link #(.LAT(2)) u2 (.clk, .rst_n, .din, .dout(o2));

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  initial begin
    din = '1;
    repeat (3) @(posedge clk);
    #1;
    chk("reset empty 1", !o1.valid);
    chk("reset empty 2", !o2.valid);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      if (hist.size() >= 1) chk("lat1", o1 == hist[hist.size()-1]);
      if (hist.size() >= 2) chk("lat2", o2 == hist[hist.size()-2]);
      din = {$urandom, $urandom};
      hist.push_back(din);
    end
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
