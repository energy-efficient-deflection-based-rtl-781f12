// hird_link -- link traversal registers between two HiRD ring stops.
//
// A chain of LAT flit registers.  Each ring stop adds one router register,
// so a hop costs LAT+1 cycles: LAT = 1 gives the 2-cycle local-ring hop and
// LAT = 2 the 3-cycle global-ring hop of the paper (the global links are
// five times longer).  Every slot of the ring moves one register per cycle,
// which makes the ring loop latency exactly stops * (LAT+1) cycles; the
// transfer-guarantee observer relies on that.  Reset clears the valid bits.
module hird_link
  import hird_pkg::*;
#(
  parameter int LAT = 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t din,
  output flit_t dout
);

  flit_t stage [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) stage[i] <= '0;
    end else begin
      stage[0] <= din;
      for (int i = 1; i < LAT; i++) stage[i] <= stage[i-1];
    end
  end

  assign dout = stage[LAT-1];

endmodule
