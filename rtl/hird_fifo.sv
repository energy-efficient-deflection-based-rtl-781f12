// hird_fifo -- synchronous flit FIFO: the node injection queues and the
// bridge transfer queues of HiRD.
//
// A circular buffer of DEPTH flits with read and write pointers and an
// occupancy count.  'dout' shows the head whenever 'empty' is low; 'deq'
// pops it at the clock edge.  'enq' writes 'din' at the clock edge and is
// only legal while 'full' is low (a write while full is ignored and caught
// by an assertion); a pop in the same cycle does not make room for it, so
// 'full' never depends on the consumer.  Any DEPTH >= 1 works, including
// the 1-entry local-to-global transfer FIFO.  Reset empties the queue.
module hird_fifo
  import hird_pkg::*;
#(
  parameter int DEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  enq,
  input  flit_t din,
  input  logic  deq,
  output flit_t dout,
  output logic  empty,
  output logic  full
);

  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t             mem [DEPTH];
  logic [PW-1:0]     rd_ptr, wr_ptr;
  logic [PW:0]       count;

  logic do_enq, do_deq;
  assign do_enq = enq && !full;
  assign do_deq = deq && !empty;

  assign empty = (count == '0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_enq) wr_ptr <= incr(wr_ptr);
      if (do_deq) rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(do_enq) - (PW+1)'(do_deq);
    end
  end

  always_ff @(posedge clk) begin
    if (do_enq) mem[wr_ptr] <= din;
  end

  // the producer must look at 'full' before writing
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) enq |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) deq |-> !empty);

endmodule
