// tb_timestamp_counter: checks that the timestamp starts at 0 after reset,
// advances by exactly one per clock, and wraps to 0 after 2^TS_BITS ticks
// (checked on a 6-bit instance; the 32-bit instance wraps after 7.2 min).
module tb_timestamp_counter;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] ts;
  logic [5:0]  ts6;
  int checks = 0, failures = 0;

  always #50 clk = ~clk;   // 10 MHz

  timestamp_counter dut (.clk, .rst_n, .ts);
  timestamp_counter #(.TS_BITS(6)) dut6 (.clk, .rst_n, .ts(ts6));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1;
    check(ts == 0 && ts6 == 0, "timestamp not 0 during reset");
    rst_n <= 1'b1;
    for (int unsigned c = 1; c <= 200; c++) begin
      @(posedge clk); #1;
      check(ts == c, $sformatf("ts=%0d expected %0d", ts, c));
      check(ts6 == 6'(c % 64), $sformatf("ts6=%0d expected %0d", ts6, c % 64));
    end
    rst_n <= 1'b0;
    @(posedge clk); #1;
    check(ts == 0, "reset does not clear the count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
