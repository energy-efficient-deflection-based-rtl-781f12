// tb_hird_fifo -- random push/pop against a queue model, for a 4-entry and a
// 1-entry FIFO; checks head data, empty and full every cycle.
module tb_hird_fifo;
  import hird_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  enq4, deq4, e4, f4, enq1, deq1, e1, f1;
  flit_t din, d4, d1;
  flit_t m4 [$], m1 [$];

  hird_fifo #(.DEPTH(4)) u4 (.clk, .rst_n, .enq(enq4), .din, .deq(deq4), .dout(d4), .empty(e4), .full(f4));
  hird_fifo #(.DEPTH(1)) u1 (.clk, .rst_n, .enq(enq1), .din, .deq(deq1), .dout(d1), .empty(e1), .full(f1));

  task automatic chk(string w, logic c);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", w, $time); end
  endtask

  initial begin
    enq4 = 0; deq4 = 0; enq1 = 0; deq1 = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk("empty4", e4 == (m4.size() == 0));
      chk("full4",  f4 == (m4.size() == 4));
      chk("empty1", e1 == (m1.size() == 0));
      chk("full1",  f1 == (m1.size() == 1));
      if (m4.size() > 0) chk("head4", d4 == m4[0]);
      if (m1.size() > 0) chk("head1", d1 == m1[0]);
      din = {$urandom, $urandom};
      enq4 = ($urandom % 3 != 0) && !f4;
      deq4 = ($urandom % 2 == 0) && !e4;
      enq1 = ($urandom % 2 == 0) && !f1;
      deq1 = ($urandom % 2 == 0) && !e1;
      @(posedge clk);
      if (deq4) void'(m4.pop_front());
      if (enq4) m4.push_back(din);
      if (deq1) void'(m1.pop_front());
      if (enq1) m1.push_back(din);
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
