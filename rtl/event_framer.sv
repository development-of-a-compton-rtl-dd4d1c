// event_framer: builds the 64-bit event word for one detector.
//
// When the reader reports a frame whose exist bit is set, the framer splits
// the frame, pads it and adds the slot timestamp and this detector's ID, as
// the paper's 64-bit event format lays out (see czt_pkg). Frames without an
// event are discarded. The word waits in a one-entry output register under a
// valid/ready handshake. If the next event arrives while the register is
// still full (the trace buffer behind it is full), the new event is lost and
// drop_pulse is raised so that the loss is counted; the held word is kept.
// The paper stores every event, including those of noisy pixels and of PHA
// 4095, so nothing is filtered here. The one-entry register and the
// drop-newest policy are this design's choices.
//
// Interface: frame_valid/frame/slot_ts from the reader and scheduler;
// ev_valid/ev_ready/ev towards the merger. ev_pulse marks every event frame
// (exist = 1) received, drop_pulse every event lost. Latency: ev_valid rises
// one cycle after frame_valid.
module event_framer
  import czt_pkg::*;
#(
  parameter detid_t DET_ID = '0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          frame_valid,
  input  native_frame_t frame,
  input  ts_t           slot_ts,
  output logic          ev_valid,
  input  logic          ev_ready,
  output event_word_t   ev,
  output logic          ev_pulse,
  output logic          drop_pulse
);

  logic is_event, can_load;

  assign is_event = frame_valid && frame.exist;
  assign can_load = !ev_valid || ev_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ev_valid   <= 1'b0;
      ev         <= '0;
      ev_pulse   <= 1'b0;
      drop_pulse <= 1'b0;
    end else begin
      ev_pulse   <= is_event;
      drop_pulse <= is_event && !can_load;
      if (is_event && can_load) begin
        ev_valid <= 1'b1;
        ev       <= make_event(frame, slot_ts, DET_ID);
      end else if (ev_valid && ev_ready) begin
        ev_valid <= 1'b0;
      end
    end
  end

  a_hold_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ev_valid && !ev_ready |=> ev_valid && $stable(ev));

endmodule
