// tb_daq_csr: drives the register block over AXI4-Lite. Checks: CTRL reads
// back what was written and drives run/det_en, STATUS and TIMESTAMP return
// the live inputs, each counter counts exactly the pulses given to it, the
// clear bit zeroes every counter, unmapped offsets read 0, and every
// response is OKAY.
module tb_daq_csr;
  localparam int N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] awaddr, araddr;
  logic awvalid, awready, wvalid, wready, bvalid, bready, arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic [1:0] bresp, rresp;
  logic run;
  logic [N-1:0] det_en, ev_p = '0, pe_p = '0, dr_p = '0;
  logic [31:0] ts = 32'h1234_0000;
  logic [10:0] level = 11'd37;
  int checks = 0, failures = 0;
  int unsigned n_ev[N], n_pe[N], n_dr[N];

  always #50 clk = ~clk;

  daq_csr #(.NUM_DET(N), .LVL_W(11)) dut (.clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .run, .det_en, .ts, .level, .ev_pulse(ev_p), .perr_pulse(pe_p), .drop_pulse(dr_p));

  axil_master_bfm bfm (.clk, .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic expect_reg(input logic [7:0] a, input logic [31:0] v, input string name);
    logic [31:0] d;
    bfm.read(a, d);
    check(d == v, $sformatf("%s = %h, expected %h", name, d, v));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random pulses while enabled, counted here
  bit pulsing = 1'b0;
  always @(posedge clk) begin
    for (int d = 0; d < N; d++) begin
      if (ev_p[d]) n_ev[d]++;
      if (pe_p[d]) n_pe[d]++;
      if (dr_p[d]) n_dr[d]++;
    end
    ev_p <= pulsing ? N'($urandom) : '0;
    pe_p <= pulsing ? N'($urandom) & N'($urandom) : '0;
    dr_p <= pulsing ? N'($urandom) & N'($urandom) & N'($urandom) : '0;
  end

  initial begin
    for (int d = 0; d < N; d++) begin n_ev[d] = 0; n_pe[d] = 0; n_dr[d] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    check(!run && det_en == '0, "not stopped after reset");
    expect_reg(8'h00, 32'h0, "CTRL after reset");
    bfm.write(8'h00, 32'h0000_0005);        // run, detector 1 only
    check(run && det_en == 2'b10, "CTRL write did not reach outputs");
    expect_reg(8'h00, 32'h5, "CTRL");
    expect_reg(8'h04, {15'd0, 1'b1, 16'd37}, "STATUS");
    expect_reg(8'h08, 32'h1234_0000, "TIMESTAMP");
    expect_reg(8'h3C, 32'h0, "unmapped 0x3C");
    expect_reg(8'h80, 32'h0, "unmapped 0x80");
    // count pulses
    pulsing = 1'b1;
    repeat (500) @(posedge clk);
    pulsing = 1'b0;
    repeat (3) @(posedge clk);
    for (int d = 0; d < N; d++) begin
      expect_reg(8'(8'h10 + 4*d), n_ev[d], $sformatf("EVENTS[%0d]", d));
      expect_reg(8'(8'h20 + 4*d), n_pe[d], $sformatf("PARITY[%0d]", d));
      expect_reg(8'(8'h30 + 4*d), n_dr[d], $sformatf("DROPPED[%0d]", d));
      check(n_ev[d] > 100 && n_dr[d] > 20, "too few pulses");
    end
    // clear
    bfm.write(8'h00, 32'h8000_0003);
    for (int d = 0; d < N; d++) begin
      expect_reg(8'(8'h10 + 4*d), 0, "EVENTS after clear");
      expect_reg(8'(8'h20 + 4*d), 0, "PARITY after clear");
      expect_reg(8'(8'h30 + 4*d), 0, "DROPPED after clear");
    end
    expect_reg(8'h00, 32'h3, "CTRL after clear write");
    bfm.write(8'h00, 32'h0);
    check(!run, "run not cleared");
    check(!bfm.resp_err && bfm.timeouts == 0, "bad AXI response or timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
