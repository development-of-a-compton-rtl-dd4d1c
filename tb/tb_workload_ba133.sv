// tb_workload_ba133: the readout at its default sizes under the count rates
// of the Ba-133 imaging runs: 35, 50 and 65 counts/s in the scatterer
// (detector 1, Det V), 15 counts/s in the absorber (detector 0, Det H), a
// share of those being true Compton pairs that hit both detectors at the
// same instant, plus one case with a noisy scatterer pixel at 300 counts/s.
// Each case simulates 0.25 s of acquisition (2.5 million clocks) with all
// rates multiplied by 40, so that a short run still holds hundreds of
// events; the readout's capacity (133,333 polls/s per detector) is far above
// even the scaled rates. One in ten absorber counts is a pair. Photons
// arrive at random instants; PHA values include full-scale 4095 events,
// which the readout must keep. Checks: every event arrives once and
// unchanged, with the timestamp of the slot it was read in; every Compton
// pair leaves as two words with equal timestamps; nothing is dropped; the
// stream never backs up by more than a few words.
module tb_workload_ba133;
  import czt_pkg::*;
  localparam int N = 2;
  localparam int unsigned CASE_TICKS = 2_500_000;      // 0.25 s at 10 MHz
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] cs_n, sclk, miso;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic tvalid, tready, tlast;
  logic [63:0] tdata;
  int checks = 0, failures = 0;

  always #50 clk = ~clk;
  // the DMA side takes words most of the time
  always @(posedge clk) tready <= ($urandom % 8) != 0;

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
    repeat (4 * CASE_TICKS + 200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference ----------------
  logic [31:0] tick = '0;
  always @(posedge clk) if (rst_n) tick <= tick + 1;

  native_frame_t pend[N][$];
  bit            pend_pair[N][$];
  logic [63:0]   expq[N][$];
  bit            exp_pair[N][$];
  int unsigned   n_given[N], n_out[N], n_pairs_out = 0, n_full_scale = 0, max_level = 0;
  logic [31:0]   pair_ts[$];

  function automatic native_frame_t mkframe(input bit noisy);
    native_frame_t f;
    f.exist  = 1'b1;
    f.pixel  = noisy ? 8'd137 : 8'($urandom);
    f.pha    = ($urandom % 20 == 0) ? 12'd4095 : 12'($urandom % 4095);
    f.rsvd   = '0;
    f.parity = 1'b0;
    for (int b = 1; b < 26; b++) f.parity ^= f[b];
    return f;
  endfunction

  task automatic give(input int d, input bit pair, input bit noisy);
    native_frame_t f;
    f = mkframe(noisy);
    if (f.pha == 12'd4095) n_full_scale++;
    pend[d].push_back(f);
    pend_pair[d].push_back(pair);
    n_given[d]++;
    if (d == 0) det0.push(f); else det1.push(f);
  endtask

  for (genvar d = 0; d < N; d++) begin : g_mon
    int unsigned sent_before = 0;
    always @(negedge cs_n[d]) if (rst_n) begin
      logic [31:0] ts_exp;
      ts_exp = tick - 1;
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
        exp_pair[d].push_back(pend_pair[d].pop_front());
      end
    end
  end

  logic [31:0] pending_pair_ts[N][$];
  always @(posedge clk) if (rst_n) begin
    if (int'(dut.u_tbuf.level) > max_level) max_level = int'(dut.u_tbuf.level);
    if (tvalid && tready) begin
      int d;
      bit p;
      d = int'(tdata[25:24]);
      if (d < N && expq[d].size() > 0) begin
        check(expq[d][0] == tdata, $sformatf("detector %0d word %h, expected %h", d, tdata, expq[d][0]));
        void'(expq[d].pop_front());
        p = exp_pair[d].pop_front();
        n_out[d]++;
        if (p) begin
          // match with the other half of the pair
          if (pending_pair_ts[1-d].size() > 0) begin
            check(pending_pair_ts[1-d][0] == tdata[63:32], "Compton pair with different timestamps");
            void'(pending_pair_ts[1-d].pop_front());
            n_pairs_out++;
          end else begin
            pending_pair_ts[d].push_back(tdata[63:32]);
          end
        end
      end else begin
        check(0, $sformatf("unexpected word %h", tdata));
      end
    end
  end

  // Photon arrivals: per tick, probability rate/1e7 (rates in counts/s).
  // Compton pairs are 1 in 10 of the absorber's counts.
  task automatic run_case(input int unsigned rate_v, input int unsigned rate_h, input int unsigned rate_noisy);
    int unsigned pv, ph, pp, pn, r;
    pp = rate_h / 10;                    // pairs per second
    for (int unsigned t = 0; t < CASE_TICKS; t++) begin
      @(posedge clk);
      r = $urandom % 10_000_000;
      if (r < pp) begin
        give(0, 1'b1, 1'b0);
        give(1, 1'b1, 1'b0);
      end else if (r < pp + (rate_h - pp)) begin
        give(0, 1'b0, 1'b0);
      end else if (r < rate_h + (rate_v - pp)) begin
        give(1, 1'b0, 1'b0);
      end else if (r < rate_h + rate_v - pp + rate_noisy) begin
        give(1, 1'b0, 1'b1);
      end
    end
  endtask

  initial begin
    logic [31:0] r0, r1;
    int unsigned rates_v[4] = '{35, 50, 65, 65};
    int unsigned noisy[4]   = '{0, 0, 0, 300};
    for (int d = 0; d < N; d++) begin n_given[d] = 0; n_out[d] = 0; end
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (4) @(posedge clk);
    bfm.write(8'h00, 32'h0000_0007);
    for (int c = 0; c < 4; c++) begin
      int unsigned g0, g1;
      g0 = n_given[0]; g1 = n_given[1];
      // rates are scaled x40 so that 0.25 s holds enough events to test
      run_case(40 * rates_v[c], 40 * 15, 40 * noisy[c]);
      $display("case %0d: scatterer %0d/s, absorber 15/s, noisy %0d/s (x40): %0d + %0d events",
               c + 1, rates_v[c], noisy[c], n_given[1] - g1, n_given[0] - g0);
    end
    repeat (2000) @(posedge clk);
    for (int d = 0; d < N; d++) begin
      check(expq[d].size() == 0 && pend[d].size() == 0, $sformatf("detector %0d: events not delivered", d));
      check(n_out[d] == n_given[d], $sformatf("detector %0d: %0d given, %0d out", d, n_given[d], n_out[d]));
    end
    bfm.read(8'h30, r0);
    bfm.read(8'h34, r1);
    check(r0 == 0 && r1 == 0, "events dropped at imaging rates");
    check(n_pairs_out > 20, $sformatf("only %0d Compton pairs", n_pairs_out));
    check(n_full_scale > 0, "no full-scale (4095) events");
    check(max_level < 8, $sformatf("buffer backed up to %0d words", max_level));
    $display("workload: events det0=%0d det1=%0d, Compton pairs=%0d, full-scale=%0d, max buffer level=%0d",
             n_out[0], n_out[1], n_pairs_out, n_full_scale, max_level);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
