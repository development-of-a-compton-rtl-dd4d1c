// read_scheduler: common read-slot timer for concurrent detector polling.
//
// The detectors are polled concurrently: one strobe starts the read of every
// detector in the same clock cycle, and the timestamp of that cycle is
// latched as the timestamp of the read slot. All events read in one slot
// therefore carry the same timestamp, which is what the offline Compton
// selection uses to pair a scatter in one detector with an absorption in the
// other. One read of the 26-bit frame takes 7.5 us, READ_CYCLES = 75 ticks
// of the 10 MHz clock (paper); a slot timer that restarts every READ_CYCLES
// cycles is this design's way of meeting it.
//
// Interface: run enables polling. While run is high, start pulses for one
// cycle at the first cycle of run and then every READ_CYCLES cycles, and
// slot_ts holds ts as sampled in the start cycle. Dropping run stops new
// slots; a slot already started finishes in the readers.
module read_scheduler #(
  parameter int unsigned READ_CYCLES = 75,
  parameter int unsigned TS_BITS     = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic [TS_BITS-1:0] ts,
  output logic               start,
  output logic [TS_BITS-1:0] slot_ts
);

  localparam int unsigned CW = $clog2(READ_CYCLES);

  logic [CW-1:0] cnt;

  // The slot counter sits at 0 whenever run is low, so the first strobe comes
  // in the first cycle run is high.
  assign start = run && (cnt == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt     <= '0;
      slot_ts <= '0;
    end else begin
      if (!run)                                   cnt <= '0;
      else if (cnt == CW'(READ_CYCLES - 1))       cnt <= '0;
      else                                        cnt <= cnt + 1'b1;
      if (start) slot_ts <= ts;
    end
  end

endmodule
