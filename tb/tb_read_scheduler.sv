// tb_read_scheduler: checks that the read-slot strobe comes in the first
// cycle of run and then exactly every 75 cycles (7.5 us at 10 MHz), that
// slot_ts holds the timestamp of the strobe cycle for the whole slot, and
// that no strobe comes while run is low.
module tb_read_scheduler;
  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  logic [31:0] ts = 0, slot_ts;
  logic start;
  int checks = 0, failures = 0;
  int unsigned cyc = 0, last_start = 0, nstart = 0;
  logic [31:0] ts_at_start;

  always #50 clk = ~clk;
  always @(posedge clk) begin cyc++; ts <= ts + 7; end   // any changing value

  read_scheduler dut (.clk, .rst_n, .run, .ts, .start, .slot_ts);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor sampled at each edge
  always @(posedge clk) if (rst_n) begin
    if (start) begin
      check(run, "start while run low");
      if (nstart > 0)
        check(cyc - last_start == 75, $sformatf("slot period %0d, expected 75", cyc - last_start));
      last_start  = cyc;
      ts_at_start = ts;
      nstart++;
    end else if (nstart > 0 && run) begin
      check(slot_ts == ts_at_start, "slot_ts does not hold the strobe timestamp");
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (10) @(posedge clk);
    check(nstart == 0, "strobe without run");
    run <= 1'b1;
    #1;
    check(start, "no strobe in first cycle of run");
    repeat (75 * 10) @(posedge clk);
    check(nstart >= 10, $sformatf("only %0d slots", nstart));
    run <= 1'b0;
    repeat (200) @(posedge clk);
    nstart = 0;
    run <= 1'b1;
    #1;
    check(start, "no strobe after run restarts");
    repeat (300) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
