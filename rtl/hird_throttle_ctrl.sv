// hird_throttle_ctrl -- injection-guarantee controller of one ring level.
//
// Each of the N members (injection points of a ring, or rings of the next
// level) drives one 'starve' wire.  When any member is starved, the
// controller throttles the new-traffic injection of every member that is
// not itself starved, so the ring drains and the starved member finds a
// free slot; when no member is starved any more, throttling stops.  If the
// starvation persists for ESC_THRESH cycles the controller raises
// 'escalate' toward the next level of the hierarchy, whose controller then
// throttles all rings ('ext_throttle').  This is the paper's hierarchical
// implementation with two wires per member.  All outputs are registered
// (one cycle of wire delay); the guarantee does not depend on that delay.
// Throttling only new node traffic, never bridge transfers, and exempting
// the starved member are this design's choices.
module hird_throttle_ctrl #(
  parameter int N          = 6,
  parameter int ESC_THRESH = 100
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] starve,
  input  logic         ext_throttle,
  output logic [N-1:0] throttle,
  output logic         active,
  output logic         escalate
);

  localparam int EW = $clog2(ESC_THRESH + 1);
  logic [EW-1:0] esc_cnt;
  logic          any;

  assign any = |starve;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      throttle <= '0;
      active   <= 1'b0;
      esc_cnt  <= '0;
      escalate <= 1'b0;
    end else begin
      throttle <= (any || ext_throttle) ? ~starve : '0;
      active   <= any;
      if (!any)                         esc_cnt <= '0;
      else if (esc_cnt != EW'(ESC_THRESH)) esc_cnt <= esc_cnt + 1'b1;
      escalate <= any && (esc_cnt == EW'(ESC_THRESH));
    end
  end

endmodule
