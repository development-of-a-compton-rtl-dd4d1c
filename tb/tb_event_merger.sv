// tb_event_merger: three sources (more than the default two, to exercise
// the rotation) offer numbered words at random times and hold them until
// taken; the sink is ready at random. Checks: every word arrives once, the
// words of each source stay in order, at most one source is granted per
// cycle, and when all sources wait continuously the grants rotate 0,1,2.
module tb_event_merger;
  import czt_pkg::*;
  localparam int N = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] in_valid = '0, in_ready;
  event_word_t [N-1:0] in_ev;
  logic out_valid, out_ready = 1'b0;
  event_word_t out_ev;
  int checks = 0, failures = 0;
  int unsigned sent [N], got [N];
  bit hold_all = 1'b0;
  int last_src = -1, rot_checks = 0;

  always #50 clk = ~clk;

  event_merger #(.NUM_DET(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_ev,
    .out_valid, .out_ready, .out_ev);

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

  // word = {source id in det_id, sequence number in timestamp}
  function automatic event_word_t mk(int src, int unsigned seq);
    event_word_t e;
    e = '0;
    e.det_id = 2'(src);
    e.timestamp = seq;
    e.pixel = 8'(seq * 7 + src);
    return e;
  endfunction

  for (genvar s = 0; s < N; s++) begin : g_src
    always @(posedge clk) begin
      if (!rst_n) begin
        in_valid[s] <= 1'b0;
        sent[s] = 0;
      end else if (in_valid[s] && in_ready[s]) begin
        sent[s]++;
        in_valid[s] <= hold_all || (($urandom % 3) == 0);
        in_ev[s]    <= mk(s, sent[s]);
      end else if (!in_valid[s]) begin
        in_valid[s] <= hold_all || (sent[s] < 300 && ($urandom % 3) == 0);
        in_ev[s]    <= mk(s, sent[s]);
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    check($onehot0(in_ready), "more than one grant");
    check(out_valid == (in_valid != '0), "out_valid is not the OR of the inputs");
    if (out_valid && out_ready) begin
      int src;
      src = int'(out_ev.det_id);
      check(out_ev.timestamp == got[src] && out_ev.pixel == 8'(got[src] * 7 + src),
            $sformatf("source %0d word %0d, expected %0d", src, out_ev.timestamp, got[src]));
      got[src]++;
      if (hold_all && in_valid == '1 && last_src >= 0) begin
        check(src == (last_src + 1) % N, $sformatf("grant %0d after %0d", src, last_src));
        rot_checks++;
      end
      last_src = src;
    end
  end

  always @(posedge clk) out_ready <= hold_all || (($urandom % 4) != 0);

  initial begin
    for (int s = 0; s < N; s++) got[s] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3000) @(posedge clk);
    hold_all = 1'b1;
    repeat (60) @(posedge clk);
    hold_all = 1'b0;
    repeat (3000) @(posedge clk);
    for (int s = 0; s < N; s++)
      check(got[s] == sent[s] && sent[s] >= 300, $sformatf("source %0d: sent %0d got %0d", s, sent[s], got[s]));
    check(rot_checks > 20, "round robin not exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
