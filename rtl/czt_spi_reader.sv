// czt_spi_reader: SPI master that polls one CZT detector module.
//
// The detector module digitises each photon and hands the result out as a
// 26-bit native frame on SPI lines (LVDS on the detector board, converted to
// LVTTL before the FPGA). Each start strobe runs one read: chip-select goes
// low, the reader waits SCLK_HALF cycles for the first bit, then gives 26
// SCLK pulses and samples MISO, most significant bit first, at the end of
// each high phase (the slave changes MISO on the falling SCLK edge). After
// the last bit chip-select goes high and the frame is reported for one cycle
// together with the result of the parity check. The exist bit (bit 25) says
// whether the detector had an event; frames without one are still reported,
// the framer discards them.
//
// The 26-bit frame and its bit layout follow the paper. SPI mode, SCLK rate
// (clk / (2*SCLK_HALF), 5 MHz at the 10 MHz clock), setup time and the even
// parity convention are this design's choices; the detector's own protocol
// is not published. MISO is sampled without a synchroniser because SCLK is
// derived from the same clock that the detector board receives.
//
// Timing: counting the edge that takes the start strobe as edge 0, the last
// bit is sampled at edge 2*SCLK_HALF*NATIVE_BITS (52), and at the next edge
// cs_n rises, the reader returns to idle and frame_valid goes high for one
// cycle, so the frame is taken downstream at edge 54. This fits in the
// 75-cycle (7.5 us) read slot. A start while busy is ignored.
module czt_spi_reader
  import czt_pkg::*;
#(
  parameter int unsigned SCLK_HALF = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  // SPI lines to the detector
  output logic          cs_n,
  output logic          sclk,
  input  logic          miso,
  // Received frame
  output logic          frame_valid,
  output native_frame_t frame,
  output logic          parity_err
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_SHIFT, S_DONE} state_t;

  localparam int unsigned HW = (SCLK_HALF > 1) ? $clog2(SCLK_HALF) : 1;
  localparam int unsigned BW = $clog2(NATIVE_BITS);

  state_t                 state;
  logic [HW-1:0]          half_cnt;
  logic [BW-1:0]          bit_cnt;
  logic [NATIVE_BITS-1:0] shreg;
  logic                   half_end;

  assign half_end = (half_cnt == HW'(SCLK_HALF - 1));
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      half_cnt    <= '0;
      bit_cnt     <= '0;
      shreg       <= '0;
      cs_n        <= 1'b1;
      sclk        <= 1'b0;
      frame_valid <= 1'b0;
      frame       <= '0;
      parity_err  <= 1'b0;
    end else begin
      frame_valid <= 1'b0;
      parity_err  <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            cs_n     <= 1'b0;
            half_cnt <= '0;
            bit_cnt  <= '0;
            state    <= S_SETUP;
          end
        end
        S_SETUP: begin
          if (half_end) begin
            half_cnt <= '0;
            sclk     <= 1'b1;
            state    <= S_SHIFT;
          end else begin
            half_cnt <= half_cnt + 1'b1;
          end
        end
        S_SHIFT: begin
          if (!half_end) begin
            half_cnt <= half_cnt + 1'b1;
          end else begin
            half_cnt <= '0;
            if (sclk) begin
              // end of the high phase: sample, then drop SCLK
              shreg <= {shreg[NATIVE_BITS-2:0], miso};
              sclk  <= 1'b0;
              if (bit_cnt == BW'(NATIVE_BITS - 1)) state <= S_DONE;
              else                                 bit_cnt <= bit_cnt + 1'b1;
            end else begin
              sclk <= 1'b1;
            end
          end
        end
        S_DONE: begin
          cs_n        <= 1'b1;
          frame_valid <= 1'b1;
          frame       <= native_frame_t'(shreg);
          parity_err  <= shreg[NATIVE_BITS-1] &&
                         (shreg[0] != frame_parity(native_frame_t'(shreg)));
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A read is one burst of exactly NATIVE_BITS clocks under chip-select.
  a_sclk_only_selected: assert property (@(posedge clk) disable iff (!rst_n) sclk |-> !cs_n);

endmodule
