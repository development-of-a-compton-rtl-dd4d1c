// trace_buffer: event FIFO with an AXI4-Stream output to the DMA.
//
// The trace buffer sits between the readout and the processing system: event
// words are written at the readout rate and read out by the AXI DMA, which
// copies them into DDR memory. The paper names the block but not its size or
// interface, so these are this design's choices: a DEPTH-word synchronous
// FIFO held in a memory array plus the AXI4-Stream output register (DEPTH+1
// words in all), an AXI4-Stream master output, and TLAST on
// every PACKET_WORDS-th word so that each DMA transfer ends after a fixed
// number of events. When the FIFO is full, in_ready is low and the framers
// upstream count the events they lose.
//
// Interface: in_valid/in_ready/in_data write side; m_axis_* read side; level
// is the number of words held, output register included. Timing: a word
// written into an empty buffer appears on m_axis_tdata two cycles later
// (memory write, then registered read), and the buffer sustains one word per
// cycle in and out at the same time.
module trace_buffer #(
  parameter int unsigned WIDTH        = 64,
  parameter int unsigned DEPTH        = 1024,
  parameter int unsigned PACKET_WORDS = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [WIDTH-1:0]          in_data,
  output logic                      m_axis_tvalid,
  input  logic                      m_axis_tready,
  output logic [WIDTH-1:0]          m_axis_tdata,
  output logic                      m_axis_tlast,
  output logic [$clog2(DEPTH):0]    level
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned PW = (PACKET_WORDS > 1) ? $clog2(PACKET_WORDS) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic [AW:0]      count;          // words in memory, not yet in the output register
  logic [PW-1:0]    pkt_cnt;
  logic             wr_en, rd_en, out_free;

  assign in_ready = (count != (AW+1)'(DEPTH));
  assign wr_en    = in_valid && in_ready;
  // The output register can take a new word when empty or being consumed.
  assign out_free = !m_axis_tvalid || m_axis_tready;
  assign rd_en    = out_free && (count != '0);
  assign level    = count + (AW+1)'(m_axis_tvalid);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_ptr] <= in_data;
    if (rd_en) m_axis_tdata <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr        <= '0;
      rd_ptr        <= '0;
      count         <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tlast  <= 1'b0;
      pkt_cnt       <= '0;
    end else begin
      if (wr_en) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (rd_en) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
      if (rd_en) begin
        m_axis_tvalid <= 1'b1;
        m_axis_tlast  <= (pkt_cnt == PW'(PACKET_WORDS - 1));
        pkt_cnt       <= (pkt_cnt == PW'(PACKET_WORDS - 1)) ? '0 : pkt_cnt + 1'b1;
      end else if (m_axis_tready) begin
        m_axis_tvalid <= 1'b0;
        m_axis_tlast  <= 1'b0;
      end
    end
  end

  a_axis_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));

endmodule
