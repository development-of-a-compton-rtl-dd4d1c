// czt_detector_model: behavioural model of a CZT detector module's SPI port.
//
// Not synthesizable; it stands in for the bought-in detector module in the
// testbenches. Events are queued with push(); each chip-select cycle shifts
// out one 26-bit frame, most significant bit first: the oldest queued frame,
// or an all-zero frame (exist bit 0) when the queue is empty. The first bit
// appears when cs_n falls and each following bit after a falling SCLK edge,
// so the master samples while SCLK is high. bits_seen counts the SCLK rising
// edges of the last read and frames_sent the frames with the exist bit set.
module czt_detector_model
  import czt_pkg::*;
(
  input  logic cs_n,
  input  logic sclk,
  output logic miso
);

  native_frame_t q[$];
  logic [NATIVE_BITS-1:0] sh;
  int unsigned bits_seen;
  int unsigned frames_sent;

  initial begin
    miso = 1'b0;
    sh = '0;
    bits_seen = 0;
    frames_sent = 0;
  end

  function automatic void push(input native_frame_t f);
    q.push_back(f);
  endfunction

  function automatic int unsigned pending();
    return q.size();
  endfunction

  always @(negedge cs_n) begin
    if (q.size() > 0) begin
      sh = q.pop_front();
      frames_sent++;
    end else begin
      sh = '0;
    end
    bits_seen = 0;
    miso = sh[NATIVE_BITS-1];
  end

  always @(posedge sclk) if (!cs_n) bits_seen++;

  always @(negedge sclk) begin
    if (!cs_n) begin
      sh   = {sh[NATIVE_BITS-2:0], 1'b0};
      miso = sh[NATIVE_BITS-1];
    end
  end

endmodule
