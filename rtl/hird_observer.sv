// hird_observer -- transfer-guarantee observer of one bridge ring input.
//
// A flit waiting to transfer through a bridge may find the transfer FIFO
// full every time it passes.  The observer bounds this.  Because every ring
// slot moves one register per cycle, a slot passes the bridge input once
// every RING_LEN cycles; 'slot' counts the slot now at the input and
// 'obs_slot' names the watched one.  Each time the watched slot passes:
//   - it holds a flit that wants to transfer here, and it is the same flit
//     as last time and is not taken now: its circle count goes up; once the
//     count reaches THRESH the observer reserves the FIFO for it ('allow'
//     then admits only that flit until it is taken);
//   - it holds such a flit and none was being watched: the flit is recorded;
//   - otherwise (slot empty, another flit, the flit is taken now, or the
//     flit has gone elsewhere): any reservation is released and the next
//     slot, which arrives in the next cycle, becomes the watched one.
// Thus the watched slot rotates around the ring and every stuck flit is
// eventually granted an entry.  The three counters (current slot, watched
// slot, circle count) follow the paper's description of the hardware; a
// flit is recognised by {source, tag}, and releasing a reservation whose
// flit has left by another bridge is this design's choice.
// 'allow' is combinational from the input flit; all state is registered.
module hird_observer
  import hird_pkg::*;
#(
  parameter int RING_LEN = LOCAL_LOOP,
  parameter int THRESH   = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t in_flit,
  input  logic  wants,      // in_flit wants to leave the ring here
  input  logic  taken,      // in_flit leaves the ring here this cycle
  output logic  allow,      // in_flit may take a transfer FIFO entry
  output logic  reserving,
  output logic  evt_reserve // a reservation starts
);

  localparam int SW = (RING_LEN > 1) ? $clog2(RING_LEN) : 1;
  localparam int CW = $clog2(THRESH + 1);

  logic [SW-1:0] slot, obs_slot;
  logic          have_id, reserve;
  flit_id_t      obs_id;
  logic [CW-1:0] circles;

  logic observe, same, wait_here;
  assign observe   = (slot == obs_slot);
  assign same      = in_flit.valid && have_id && (flit_id(in_flit) == obs_id);
  assign wait_here = in_flit.valid && wants && !taken;

  assign allow       = !reserve || same;
  assign reserving   = reserve;
  assign evt_reserve = observe && same && wait_here && !reserve &&
                       (circles + 1'b1 >= CW'(THRESH));

  function automatic logic [SW-1:0] nxt(logic [SW-1:0] s);
    return (s == SW'(RING_LEN - 1)) ? '0 : s + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot     <= '0;
      obs_slot <= '0;
      have_id  <= 1'b0;
      reserve  <= 1'b0;
      obs_id   <= '0;
      circles  <= '0;
    end else begin
      slot <= nxt(slot);
      if (observe) begin
        if (same && wait_here) begin
          if (circles != CW'(THRESH)) circles <= circles + 1'b1;
          if (circles + 1'b1 >= CW'(THRESH)) reserve <= 1'b1;
        end else if (!have_id && wait_here) begin
          have_id <= 1'b1;
          obs_id  <= flit_id(in_flit);
          circles <= '0;
        end else begin
          obs_slot <= nxt(obs_slot);
          have_id  <= 1'b0;
          reserve  <= 1'b0;
          circles  <= '0;
        end
      end
    end
  end

  // a reservation only exists for a recorded flit
  a_reserve_has_id: assert property (@(posedge clk) disable iff (!rst_n) reserve |-> have_id);

endmodule
