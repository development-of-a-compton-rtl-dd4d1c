// tb_event_framer: feeds native frames (with and without the exist bit)
// and a slot timestamp into the framer while the downstream ready toggles
// at random. Each expected 64-bit word is assembled here bit range by bit
// range from the published layout (timestamp 63..32, detector ID 25..24,
// pixel 23..16, PHA 12..0, reserved bits zero). Checks: words come out in
// order and equal to the expected ones, frames without an event produce
// nothing, an event arriving while the output register is full is dropped
// and flagged, and ev_pulse counts every event frame.
module tb_event_framer;
  import czt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic frame_valid = 1'b0, ev_ready = 1'b0;
  native_frame_t frame = '0;
  logic [31:0] slot_ts = '0;
  logic ev_valid, ev_pulse, drop_pulse;
  event_word_t ev;
  logic [63:0] expq[$];
  int checks = 0, failures = 0;
  int unsigned nfv = 0, n_ev = 0, n_pulse = 0, n_drop_exp = 0, n_drop = 0, n_out = 0;

  always #50 clk = ~clk;

  event_framer #(.DET_ID(2'd2)) dut (.clk, .rst_n, .frame_valid, .frame, .slot_ts,
    .ev_valid, .ev_ready, .ev, .ev_pulse, .drop_pulse);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n) begin
    if (ev_pulse) n_pulse++;
    if (drop_pulse) n_drop++;
    if (ev_valid && ev_ready) begin
      n_out++;
      if (expq.size() == 0) check(0, "unexpected word");
      else begin
        logic [63:0] e;
        e = expq.pop_front();
        check(64'(ev) == e, $sformatf("word %h expected %h", ev, e));
      end
    end
    // reference model, sampled at the same edge as the framer
    if (frame_valid) nfv++;
    if (frame_valid && frame.exist) begin
      logic [63:0] w;
      n_ev++;
      w = '0;
      w[63:32] = slot_ts;
      w[25:24] = 2'd2;
      w[23:16] = frame[24:17];
      w[11:0]  = frame[16:5];
      if (ev_valid && !ev_ready) n_drop_exp++;
      else                       expq.push_back(w);
    end
  end

  always @(posedge clk) ev_ready <= ($urandom % 2) != 0;

  // frame source: a frame in about half of the cycles, 3 in 4 with an event
  bit drive = 1'b0;
  always @(posedge clk) begin
    native_frame_t f;
    f = native_frame_t'(26'($urandom));
    f.exist = ($urandom % 4) != 0;
    frame_valid <= drive && (($urandom % 2) != 0);
    frame       <= f;
    slot_ts     <= $urandom;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    drive = 1'b1;
    repeat (1500) @(posedge clk);
    drive = 1'b0;
    ev_ready <= 1'b1;
    repeat (20) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d words never came out", expq.size()));
    check(n_pulse == n_ev, $sformatf("ev_pulse %0d, expected %0d", n_pulse, n_ev));
    check(n_drop == n_drop_exp, $sformatf("drops %0d, expected %0d", n_drop, n_drop_exp));
    check(n_drop_exp > 0, "no drop was exercised");
    $display("framer: %0d valid %0d events, %0d out, %0d dropped", nfv, n_ev, n_out, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
