// timestamp_counter: free-running count of system clock ticks.
//
// The event timestamp is the number of 10 MHz clock ticks since power-on,
// 32 bits wide, so one tick is 0.1 us and the count wraps after 2^32 ticks
// (about 7.2 minutes). Wrap-around is left to offline processing, which adds
// an offset each time the count steps backwards; the counter itself simply
// rolls over. Width and tick follow the paper; the synchronous active-low
// reset standing in for "power-on" is this design's choice.
//
// Interface: clk, rst_n in; ts out. ts is 0 in the first cycle after reset
// and increases by one every clock.
module timestamp_counter #(
  parameter int unsigned TS_BITS = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic [TS_BITS-1:0] ts
);

  always_ff @(posedge clk) begin
    if (!rst_n) ts <= '0;
    else        ts <= ts + 1'b1;
  end

endmodule
