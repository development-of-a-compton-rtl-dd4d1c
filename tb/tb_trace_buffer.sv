// tb_trace_buffer: a 16-word buffer with 4-word packets, written and read
// at random rates, with phases where the reader stops so that the buffer
// fills. Checks: words leave in the order written and none is lost, in_ready
// falls exactly when 17 words are held (16 in memory, one in the output
// register), TLAST marks every 4th word, level
// matches a reference count, TDATA/TLAST stay put while TREADY is low, and
// with both sides always ready the buffer moves one word per cycle.
module tb_trace_buffer;
  localparam int D = 16, PK = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, tvalid, tready = 1'b0, tlast;
  logic [63:0] in_data = '0, tdata;
  logic [4:0] level;
  int checks = 0, failures = 0;
  longint unsigned wr_seq = 0, rd_seq = 0;
  int unsigned held = 0, full_seen = 0;
  int wmode = 0, rmode = 0;   // 0 random, 1 always, 2 never

  always #50 clk = ~clk;

  trace_buffer #(.DEPTH(D), .PACKET_WORDS(PK)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .m_axis_tvalid(tvalid), .m_axis_tready(tready), .m_axis_tdata(tdata), .m_axis_tlast(tlast), .level);

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

  function automatic logic [63:0] pattern(longint unsigned n);
    return {32'(n * 32'h9E3779B1), 32'(n)};
  endfunction

  logic [63:0] last_tdata;
  logic last_tlast, last_stall = 1'b0;

  always @(posedge clk) if (rst_n) begin
    // reference occupancy (includes the output register)
    check(level == 5'(held), $sformatf("level %0d, expected %0d", level, held));
    check(in_ready == (held < D + 1), $sformatf("in_ready=%0b with %0d held", in_ready, held));
    if (held == D + 1) full_seen++;
    if (last_stall) check(tvalid && tdata == last_tdata && tlast == last_tlast, "output changed under stall");
    if (tvalid && tready) begin
      check(tdata == pattern(rd_seq), $sformatf("word %h, expected %h", tdata, pattern(rd_seq)));
      check(tlast == ((rd_seq % 64'(PK)) == 64'(PK - 1)), $sformatf("tlast=%0b on word %0d", tlast, rd_seq));
      rd_seq++;
    end
    held = held + ((in_valid && in_ready) ? 1 : 0) - ((tvalid && tready) ? 1 : 0);
    last_stall = tvalid && !tready;
    last_tdata = tdata;
    last_tlast = tlast;
    if (in_valid && in_ready) wr_seq++;
  end

  // drivers
  longint unsigned dseq = 0;   // words accepted, as seen by the driver
  always @(posedge clk) begin
    logic v;
    v = (wmode == 1) || (wmode == 0 && ($urandom % 2 == 0));
    if (rst_n && in_valid && in_ready) dseq++;
    if (!in_valid || in_ready) begin
      in_valid <= v;
      in_data  <= pattern(dseq);
    end
    tready <= (rmode == 1) || (rmode == 0 && ($urandom % 2 == 0));
  end

  initial begin
    longint unsigned r0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (500) @(posedge clk);
    rmode = 2;  wmode = 1;          // fill up
    repeat (60) @(posedge clk);
    rmode = 0;  wmode = 0;
    repeat (500) @(posedge clk);
    wmode = 1;  rmode = 1;          // full rate
    repeat (20) @(posedge clk);
    r0 = rd_seq;
    repeat (100) @(posedge clk);
    check(rd_seq - r0 == 100, $sformatf("%0d words in 100 cycles at full rate", rd_seq - r0));
    wmode = 2;  rmode = 1;          // drain
    repeat (40) @(posedge clk);
    check(held == 0 && rd_seq == wr_seq, $sformatf("written %0d read %0d", wr_seq, rd_seq));
    check(full_seen > 10, "buffer never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
