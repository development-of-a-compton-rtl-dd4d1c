// tb_compton_daq_top: end-to-end run of the readout at its default sizes
// (two detectors, 75-cycle read slot, 1024-word trace buffer, 256-word
// packets) against two behavioural detector models.
//
// The testbench keeps its own copy of every frame it gives a detector and,
// when that detector's chip-select falls, turns it into the 64-bit word the
// readout should produce, stamped with its own count of clock ticks. Words
// leaving on the AXI4-Stream port must match these, in order per detector;
// a word may be missing only while the buffer is full, and the number of
// missing words must equal the DROPPED counters. Phases:
//   1. coincident pairs (an event in both detectors in the same slot) and
//      singles, some with a wrong parity bit;
//   2. detector 1 disabled: its queued events must wait, then flow when it
//      is enabled again;
//   3. run cleared: no SPI activity at all;
//   4. stream stalled until the buffer is full: words are dropped and
//      counted, and the buffer level reads 1025 (1024 + output register).
// It also checks the 75-cycle (7.5 us) polling period, TLAST on every
// 256th word and the EVENTS/PARITY counters, and counts a failure for any
// of these mechanisms that never happened.
module tb_compton_daq_top;
  import czt_pkg::*;
  localparam int N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] cs_n, sclk, miso;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic tvalid, tready = 1'b1, tlast;
  logic [63:0] tdata;
  int checks = 0, failures = 0;

  always #50 clk = ~clk;   // 10 MHz

  compton_daq_top dut (.clk, .rst_n, .det_cs_n(cs_n), .det_sclk(sclk), .det_miso(miso),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axis_tvalid(tvalid), .m_axis_tready(tready), .m_axis_tdata(tdata), .m_axis_tlast(tlast));

  czt_detector_model det0 (.cs_n(cs_n[0]), .sclk(sclk[0]), .miso(miso[0]));
  czt_detector_model det1 (.cs_n(cs_n[1]), .sclk(sclk[1]), .miso(miso[1]));

  axil_master_bfm bfm (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  logic [31:0] tick = '0;                 // own count of clock ticks since reset
  always @(posedge clk) if (rst_n) tick <= tick + 1;

  native_frame_t pend[N][$];              // frames given to each detector, not yet read
  logic [63:0]   expq[N][$];              // words the readout owes us
  int unsigned   n_event[N], n_bad[N];    // event frames read, those with bad parity
  int unsigned   last_fall[N], n_slot_chk = 0;
  logic [31:0]   slot_of[N][$];           // timestamps of each detector's events

  function automatic native_frame_t mkframe(input bit bad);
    native_frame_t f;
    f.exist  = 1'b1;
    f.pixel  = 8'($urandom);
    f.pha    = 12'($urandom % 4096);
    f.rsvd   = 4'($urandom);
    f.parity = 1'b0;
    for (int b = 1; b < 26; b++) f.parity ^= f[b];
    if (bad) f.parity = ~f.parity;
    return f;
  endfunction

  task automatic give(input int d, input bit bad);
    native_frame_t f;
    f = mkframe(bad);
    pend[d].push_back(f);
    if (d == 0) det0.push(f); else det1.push(f);
  endtask

  for (genvar d = 0; d < N; d++) begin : g_mon
    int unsigned sent_before = 0;
    always @(negedge cs_n[d]) if (rst_n) begin
      logic [31:0] ts_exp;
      ts_exp = tick - 1;                  // the strobe came one tick before cs_n fell
      if (last_fall[d] != 0) begin
        // consecutive polls are one slot apart; after a pause, whole slots
        check((ts_exp - last_fall[d]) % 75 == 0, $sformatf("det %0d polled after %0d ticks", d, ts_exp - last_fall[d]));
        if (ts_exp - last_fall[d] == 75) n_slot_chk++;
      end
      last_fall[d] = ts_exp;
      #1;
      if ((d == 0 ? det0.frames_sent : det1.frames_sent) != sent_before) begin
        native_frame_t f;
        logic [63:0] w;
        sent_before = (d == 0 ? det0.frames_sent : det1.frames_sent);
        f = pend[d].pop_front();
        w = '0;
        w[63:32] = ts_exp;
        w[25:24] = 2'(d);
        w[23:16] = f[24:17];
        w[11:0]  = f[16:5];
        expq[d].push_back(w);
        slot_of[d].push_back(ts_exp);
        n_event[d]++;
        if (f.parity != ^f[25:1]) n_bad[d]++;
      end
    end
  end

  // ---------------- stream sink ----------------
  int unsigned n_words = 0, n_last = 0, n_skipped = 0, n_pairs = 0;
  logic [31:0] last_ts[N];
  bit          have_ts[N];
  always @(posedge clk) if (rst_n && tvalid && tready) begin
    int d;
    bit found;
    d = int'(tdata[25:24]);
    check(d < N, "bad detector ID");
    check(tdata[31:26] == 0 && tdata[15:12] == 0, "reserved bits not zero");
    check(tlast == ((n_words % 256) == 255), $sformatf("tlast=%0b on word %0d", tlast, n_words));
    if (tlast) n_last++;
    n_words++;
    found = 0;
    if (d < N) begin
      while (expq[d].size() > 0 && !found) begin
        if (expq[d][0] == tdata) found = 1;
        else begin void'(expq[d].pop_front()); n_skipped++; end
      end
      if (found) void'(expq[d].pop_front());
      check(found, $sformatf("word %h not expected from detector %0d", tdata, d));
      // a coincidence: the other detector had a word with the same stamp
      if (have_ts[1-d] && last_ts[1-d] == tdata[63:32]) n_pairs++;
      last_ts[d] = tdata[63:32];
      have_ts[d] = 1'b1;
    end
  end

  task automatic expect_reg(input logic [7:0] a, input logic [31:0] v, input string name);
    logic [31:0] r;
    bfm.read(a, r);
    check(r == v, $sformatf("%s = %0d, expected %0d", name, r, v));
  endtask

  // Wait until every frame given has been read and the stream has gone
  // quiet; words still owed then were never delivered.
  task automatic wait_drained(input bit drops_allowed);
    int n = 0, quiet = 0;
    while (pend[0].size() + pend[1].size() != 0 && n < 20000) begin
      @(posedge clk); n++;
    end
    check(n < 20000, "frames never read");
    while (quiet < 300) begin
      @(posedge clk);
      quiet = tvalid ? 0 : quiet + 1;
    end
    for (int d = 0; d < N; d++) begin
      if (!drops_allowed) check(expq[d].size() == 0, $sformatf("%0d words from detector %0d missing", expq[d].size(), d));
      n_skipped += expq[d].size();
      expq[d].delete();
    end
  endtask

  // ---------------- stimulus ----------------
  int unsigned mech_pairs, mech_parity, mech_disable, mech_stop, mech_drop, mech_full;
  initial begin
    logic [31:0] r, drops;
    int unsigned words0, spi_edges;
    for (int d = 0; d < N; d++) begin n_event[d] = 0; n_bad[d] = 0; last_fall[d] = 0; have_ts[d] = 0; end
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    check(cs_n == '1, "SPI active before run");

    // phase 1: coincident pairs and singles
    for (int k = 0; k < 60; k++) begin
      give(0, k % 13 == 5);
      give(1, k % 17 == 9);
    end
    for (int k = 0; k < 20; k++) give(k % 2, 1'b0);
    bfm.write(8'h00, 32'h0000_0007);       // run, both detectors
    wait_drained(0);
    mech_pairs = n_pairs;
    check(n_pairs >= 60, $sformatf("%0d coincident pairs seen, expected at least 60", n_pairs));
    mech_parity = n_bad[0] + n_bad[1];

    // phase 2: detector 1 disabled
    bfm.write(8'h00, 32'h0000_0003);       // run, detector 0 only
    repeat (100) @(posedge clk);
    for (int k = 0; k < 10; k++) begin give(0, 0); give(1, 0); end
    repeat (75 * 15) @(posedge clk);
    check(pend[1].size() == 10, $sformatf("disabled detector was read (%0d left)", pend[1].size()));
    check(pend[0].size() == 0, "enabled detector not read");
    mech_disable = (pend[1].size() == 10);
    bfm.write(8'h00, 32'h0000_0007);
    wait_drained(0);
    check(n_skipped == 0, "words lost before the overflow phase");

    // phase 3: run cleared
    bfm.write(8'h00, 32'h0000_0006);
    repeat (10) @(posedge clk);
    give(0, 0);
    spi_edges = 0;
    fork
      begin repeat (500) @(posedge clk); end
      forever begin @(negedge cs_n[0] or negedge cs_n[1]); spi_edges++; end
    join_any
    disable fork;
    check(spi_edges == 0, "SPI activity while stopped");
    for (int d = 0; d < N; d++) last_fall[d] = 0;
    mech_stop = (spi_edges == 0);

    // phase 4: stall the stream until the buffer overflows
    tready <= 1'b0;
    for (int k = 0; k < 600; k++) begin give(0, 0); give(1, 0); end
    bfm.write(8'h00, 32'h0000_0007);
    repeat (75 * 605) @(posedge clk);
    bfm.read(8'h04, r);
    check(r[15:0] == 16'd1025, $sformatf("level %0d when full, expected 1025", r[15:0]));
    mech_full = (r[15:0] == 16'd1025);
    tready <= 1'b1;
    wait_drained(1);
    bfm.read(8'h30, drops);
    bfm.read(8'h34, r);
    drops += r;
    check(drops == n_skipped, $sformatf("DROPPED total %0d, words missing %0d", drops, n_skipped));
    mech_drop = drops;

    // counters
    expect_reg(8'h10, n_event[0], "EVENTS[0]");
    expect_reg(8'h14, n_event[1], "EVENTS[1]");
    expect_reg(8'h20, n_bad[0], "PARITY[0]");
    expect_reg(8'h24, n_bad[1], "PARITY[1]");
    check(n_words + n_skipped == n_event[0] + n_event[1], "words + drops != events");
    check(n_slot_chk > 100, "polling period not checked");

    $display("mechanisms: coincident pairs=%0d parity errors=%0d detector disabled=%0d run stopped=%0d buffer full=%0d drops=%0d packets=%0d",
             mech_pairs, mech_parity, mech_disable, mech_stop, mech_full, mech_drop, n_last);
    check(mech_pairs > 0,   "no coincidence");
    check(mech_parity > 0,  "no parity error");
    check(mech_disable > 0, "no detector disable");
    check(mech_stop > 0,    "no stop");
    check(mech_full > 0,    "buffer never full");
    check(mech_drop > 0,    "no drop");
    check(n_last > 0,       "no packet end");
    check(!bfm.resp_err && bfm.timeouts == 0, "AXI4-Lite error or timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
