// daq_csr: AXI4-Lite control and status registers for the readout.
//
// The acquisition is run from software on the processing system, so the
// readout exposes a small register map on an AXI4-Lite slave. Software sets
// the run bit to start polling the detectors, chooses which detectors take
// part, and reads the live timestamp, the trace-buffer fill level and, per
// detector, the number of events read, of frames with a parity error and of
// events lost because the trace buffer was full. That the readout is
// controlled from the PS follows the paper; the register map, the counters
// and their widths are this design's choices.
//
// Register map (byte offsets, 32-bit registers):
//   0x00 CTRL      rw  [0] run, [NUM_DET:1] detector enable,
//                      [31] write 1 to clear all counters (reads 0)
//   0x04 STATUS    ro  [15:0] trace-buffer level, [16] run
//   0x08 TIMESTAMP ro  live 32-bit timestamp
//   0x10+4d EVENTS[d]   ro  events (exist bit set) read from detector d
//   0x20+4d PARITY[d]   ro  events from detector d with a parity error
//   0x30+4d DROPPED[d]  ro  events from detector d lost to a full buffer
// Other offsets read 0 and ignore writes. Counters wrap.
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending; BVALID follows one cycle later with OKAY. A read is
// taken when ARVALID is high and no read data is pending; RVALID follows one
// cycle later. WSTRB is ignored (whole-register writes).
module daq_csr #(
  parameter int unsigned NUM_DET = 2,
  parameter int unsigned LVL_W   = 11
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [7:0]         s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [7:0]         s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  // Control out
  output logic               run,
  output logic [NUM_DET-1:0] det_en,
  // Status in
  input  logic [31:0]        ts,
  input  logic [LVL_W-1:0]   level,
  input  logic [NUM_DET-1:0] ev_pulse,
  input  logic [NUM_DET-1:0] perr_pulse,
  input  logic [NUM_DET-1:0] drop_pulse
);

  logic [31:0] ev_cnt   [NUM_DET];
  logic [31:0] perr_cnt [NUM_DET];
  logic [31:0] drop_cnt [NUM_DET];
  logic        wr_take, rd_take, clear;

  assign wr_take        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_take;
  assign s_axil_wready  = wr_take;
  assign s_axil_bresp   = 2'b00;
  assign rd_take        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_take;
  assign s_axil_rresp   = 2'b00;
  assign clear          = wr_take && (s_axil_awaddr[7:2] == 6'h00) && s_axil_wdata[31];

  // Control register and write response
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run           <= 1'b0;
      det_en        <= '0;
      s_axil_bvalid <= 1'b0;
    end else begin
      if (wr_take) begin
        s_axil_bvalid <= 1'b1;
        if (s_axil_awaddr[7:2] == 6'h00) begin
          run    <= s_axil_wdata[0];
          det_en <= s_axil_wdata[NUM_DET:1];
        end
      end else if (s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
    end
  end

  // Counters
  always_ff @(posedge clk) begin
    for (int d = 0; d < NUM_DET; d++) begin
      if (!rst_n || clear) begin
        ev_cnt[d]   <= '0;
        perr_cnt[d] <= '0;
        drop_cnt[d] <= '0;
      end else begin
        if (ev_pulse[d])   ev_cnt[d]   <= ev_cnt[d] + 1'b1;
        if (perr_pulse[d]) perr_cnt[d] <= perr_cnt[d] + 1'b1;
        if (drop_pulse[d]) drop_cnt[d] <= drop_cnt[d] + 1'b1;
      end
    end
  end

  // Read mux
  function automatic logic [31:0] read_reg(input logic [5:0] word);
    logic [31:0] r;
    r = '0;
    case (word)
      6'h00: r = {{(31-NUM_DET){1'b0}}, det_en, run};
      6'h01: r = {15'd0, run, 16'(level)};
      6'h02: r = ts;
      default: begin
        for (int d = 0; d < NUM_DET; d++) begin
          if (word == 6'(4  + d)) r = ev_cnt[d];
          if (word == 6'(8  + d)) r = perr_cnt[d];
          if (word == 6'(12 + d)) r = drop_cnt[d];
        end
      end
    endcase
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else if (rd_take) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rdata  <= read_reg(s_axil_araddr[7:2]);
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));

endmodule
