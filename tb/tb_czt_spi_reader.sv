// tb_czt_spi_reader: polls a behavioural detector model with the reader.
// Queued frames (random pixel and PHA, correct or wrong parity) and empty
// polls are read one per 75-cycle slot. Checks: the received frame equals
// the one sent, the parity flag is set exactly for event frames with a
// wrong parity bit, each read gives 26 SCLK pulses, and frame_valid comes
// 54 clock edges after the start strobe (2*26 SCLK half-periods + 2).
module tb_czt_spi_reader;
  import czt_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, cs_n, sclk, miso, frame_valid, parity_err;
  native_frame_t frame;
  int checks = 0, failures = 0;
  int unsigned cyc = 0, start_cyc = 0;

  always #50 clk = ~clk;
  always @(posedge clk) cyc++;

  czt_spi_reader dut (.clk, .rst_n, .start, .busy, .cs_n, .sclk, .miso,
                      .frame_valid, .frame, .parity_err);
  czt_detector_model det (.cs_n, .sclk, .miso);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    native_frame_t f, exp_f;
    bit bad;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    check(cs_n && !busy, "not idle after reset");
    for (int n = 0; n < 60; n++) begin
      // build the frame: every 5th poll is empty, every 7th has bad parity
      if (n % 5 == 4) begin
        exp_f = '0;
        bad = 0;
      end else begin
        f.exist  = 1'b1;
        f.pixel  = 8'($urandom);
        f.pha    = 12'($urandom);
        f.rsvd   = 4'($urandom);
        f.parity = 1'b0;
        // even parity over all 26 bits, computed bit by bit
        for (int b = 1; b < 26; b++) f.parity ^= f[b];
        bad = (n % 7 == 3);
        if (bad) f.parity = ~f.parity;
        exp_f = f;
        det.push(f);
      end
      start <= 1'b1;
      @(posedge clk);
      start_cyc = cyc;
      start <= 1'b0;
      while (!frame_valid) @(posedge clk);
      check(cyc - start_cyc == 54, $sformatf("latency %0d, expected 54", cyc - start_cyc));
      check(frame == exp_f, $sformatf("frame %h expected %h", frame, exp_f));
      check(parity_err == bad, $sformatf("parity_err=%0b expected %0b", parity_err, bad));
      check(det.bits_seen == 26, $sformatf("%0d SCLK pulses", det.bits_seen));
      repeat (75 - 55) @(posedge clk);
      check(cs_n && !busy, "reader not idle at end of slot");
    end
    // start strobes while busy are ignored
    det.push(native_frame_t'({1'b1, 25'h0ABCDE}));
    start <= 1'b1;
    repeat (10) @(posedge clk);
    start <= 1'b0;
    while (!frame_valid) @(posedge clk);
    check(det.bits_seen == 26, "restarted in mid-read");
    repeat (5) @(posedge clk);
    check(!busy, "extra read after strobes during busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
