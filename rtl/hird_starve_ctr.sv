// hird_starve_ctr -- injection starvation counter of one injection point
// (the per-injection-point counter of HiRD's injection guarantee).
//
// Counts the cycles in which the injection point has a flit waiting
// ('waiting') but does not inject it, and clears when a flit is injected
// ('injected').  'starved' is high once the count has reached THRESH and is
// the request wire to the ring's throttling controller.  While 'hold' is
// high (the router is being throttled by the guarantee) the count neither
// grows nor clears -- a throttled router must not itself turn into a
// starved one; that rule is this design's choice.  The counter saturates at
// THRESH.  THRESH = 100 is the paper's evaluated threshold.
module hird_starve_ctr #(
  parameter int THRESH = 100
) (
  input  logic clk,
  input  logic rst_n,
  input  logic waiting,
  input  logic injected,
  input  logic hold,
  output logic starved
);

  localparam int CW = $clog2(THRESH + 1);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 cnt <= '0;
    else if (injected)          cnt <= '0;
    else if (waiting && !hold && cnt != CW'(THRESH)) cnt <= cnt + 1'b1;
  end

  assign starved = (cnt == CW'(THRESH));

endmodule
