// event_merger: round-robin merge of the per-detector event streams.
//
// All detectors are read in the same slot, so several of them can hold an
// event at once (a Compton pair gives one in each). The merger passes one
// word per cycle to the trace buffer and grants the inputs in round-robin
// order, starting after the input granted last, so no detector can starve
// another. The arbitration scheme is this design's choice; the paper shows
// only that both detectors feed one buffer.
//
// Interface: valid/ready on each side. The output is combinational from the
// inputs (no added latency): out_valid is the OR of the valid inputs, and
// exactly the granted input sees in_ready when out_ready is high.
module event_merger
  import czt_pkg::*;
#(
  parameter int unsigned NUM_DET = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic        [NUM_DET-1:0]  in_valid,
  output logic        [NUM_DET-1:0]  in_ready,
  input  event_word_t [NUM_DET-1:0]  in_ev,
  output logic                       out_valid,
  input  logic                       out_ready,
  output event_word_t                out_ev
);

  localparam int unsigned IW = (NUM_DET > 1) ? $clog2(NUM_DET) : 1;

  logic [IW-1:0] last;   // input granted most recently
  logic [IW-1:0] sel;
  logic          found;

  always_comb begin
    int unsigned idx;
    sel   = '0;
    found = 1'b0;
    for (int unsigned k = 1; k <= NUM_DET; k++) begin
      idx = (int'(last) + k) % NUM_DET;
      if (!found && in_valid[idx]) begin
        sel   = IW'(idx);
        found = 1'b1;
      end
    end
  end

  assign out_valid = found;
  assign out_ev    = in_ev[sel];

  always_comb begin
    in_ready = '0;
    if (found) in_ready[sel] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                      last <= IW'(NUM_DET - 1);
    else if (out_valid && out_ready) last <= sel;
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready));

endmodule
