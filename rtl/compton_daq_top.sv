// compton_daq_top: programmable-logic readout of a two-detector CZT
// Compton imager.
//
// A Compton imager needs, for every photon that scatters in one detector
// and is absorbed in the other, both energy deposits, both pixel positions
// and proof that the two happened together. This readout polls all CZT
// detector modules concurrently: one read slot of READ_CYCLES clocks
// (7.5 us at the 10 MHz system clock) starts the SPI read of every enabled
// detector in the same cycle, and every event read in that slot is stamped
// with the same 32-bit timestamp, so coincident pairs can be found offline
// by equal timestamps. Each event becomes a 64-bit word (timestamp,
// detector ID, pixel ID, PHA); the per-detector words are merged round-robin
// into a trace buffer whose AXI4-Stream output feeds the DMA into processor
// memory. Software on the processing system starts and stops the
// acquisition and reads counters through an AXI4-Lite register block.
//
// From the paper: two concurrently read detectors, the 26-bit native frame
// and 64-bit event formats, the 32-bit tick timestamp, 7.5 us per read at
// 10 MHz, the trace buffer feeding the DMA and control from the PS. This
// design's own choices: the SPI timing, the slot timer, the merge order,
// the buffer depth and packet length, the register map and the detector ID
// assignment (detector d gets ID d; DET_ID_BASE moves the range).
//
// Interface: clk is the 10 MHz system clock that also clocks the detector
// boards; rst_n is a synchronous active-low reset. det_cs_n/det_sclk/det_miso
// are the SPI lines of each detector (LVTTL side of the level converters).
// s_axil_* is the register slave (see daq_csr), m_axis_* the event stream.
module compton_daq_top
  import czt_pkg::*;
#(
  parameter int unsigned NUM_DET      = 2,
  parameter int unsigned READ_CYCLES  = 75,
  parameter int unsigned SCLK_HALF    = 1,
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned PACKET_WORDS = 256,
  parameter int unsigned DET_ID_BASE  = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  // Detector SPI lines
  output logic [NUM_DET-1:0] det_cs_n,
  output logic [NUM_DET-1:0] det_sclk,
  input  logic [NUM_DET-1:0] det_miso,
  // AXI4-Lite control slave
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
  // AXI4-Stream event output to the DMA
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready,
  output logic [63:0]        m_axis_tdata,
  output logic               m_axis_tlast
);

  localparam int unsigned LVL_W = $clog2(DEPTH) + 1;

  // A read must finish inside its slot.
  if (READ_CYCLES < 2 + 2 * SCLK_HALF * NATIVE_BITS) begin : g_chk_slot
    $error("READ_CYCLES too short for one SPI frame");
  end
  if (DET_ID_BASE + NUM_DET > (1 << DETID_BITS)) begin : g_chk_id
    $error("detector IDs do not fit the 2-bit field");
  end

  ts_t                        ts, slot_ts;
  logic                       run, slot_start;
  logic        [NUM_DET-1:0]  det_en, rd_busy;
  logic        [NUM_DET-1:0]  fr_valid, perr, ev_pulse, drop_pulse;
  native_frame_t [NUM_DET-1:0] fr;
  logic        [NUM_DET-1:0]  ev_valid, ev_ready;
  event_word_t [NUM_DET-1:0]  ev;
  logic                       mg_valid, mg_ready;
  event_word_t                mg_ev;
  logic        [LVL_W-1:0]    level;

  timestamp_counter #(.TS_BITS(TS_BITS)) u_ts (
    .clk, .rst_n, .ts
  );

  read_scheduler #(.READ_CYCLES(READ_CYCLES), .TS_BITS(TS_BITS)) u_sched (
    .clk, .rst_n, .run, .ts, .start(slot_start), .slot_ts
  );

  for (genvar d = 0; d < NUM_DET; d++) begin : g_det
    czt_spi_reader #(.SCLK_HALF(SCLK_HALF)) u_reader (
      .clk, .rst_n,
      .start      (slot_start && det_en[d]),
      .busy       (rd_busy[d]),
      .cs_n       (det_cs_n[d]),
      .sclk       (det_sclk[d]),
      .miso       (det_miso[d]),
      .frame_valid(fr_valid[d]),
      .frame      (fr[d]),
      .parity_err (perr[d])
    );

    event_framer #(.DET_ID(detid_t'(DET_ID_BASE + d))) u_framer (
      .clk, .rst_n,
      .frame_valid(fr_valid[d]),
      .frame      (fr[d]),
      .slot_ts,
      .ev_valid   (ev_valid[d]),
      .ev_ready   (ev_ready[d]),
      .ev         (ev[d]),
      .ev_pulse   (ev_pulse[d]),
      .drop_pulse (drop_pulse[d])
    );
  end

  event_merger #(.NUM_DET(NUM_DET)) u_merge (
    .clk, .rst_n,
    .in_valid (ev_valid),
    .in_ready (ev_ready),
    .in_ev    (ev),
    .out_valid(mg_valid),
    .out_ready(mg_ready),
    .out_ev   (mg_ev)
  );

  trace_buffer #(.WIDTH(EVENT_BITS), .DEPTH(DEPTH), .PACKET_WORDS(PACKET_WORDS)) u_tbuf (
    .clk, .rst_n,
    .in_valid     (mg_valid),
    .in_ready     (mg_ready),
    .in_data      (mg_ev),
    .m_axis_tvalid,
    .m_axis_tready,
    .m_axis_tdata,
    .m_axis_tlast,
    .level
  );

  daq_csr #(.NUM_DET(NUM_DET), .LVL_W(LVL_W)) u_csr (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .run, .det_en,
    .ts, .level,
    .ev_pulse, .perr_pulse(perr), .drop_pulse
  );

  // Concurrent polling: a new slot never starts while a reader is busy.
  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n) slot_start |-> rd_busy == '0);

endmodule
