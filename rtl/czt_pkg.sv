// czt_pkg: types and constants shared by the CZT detector readout.
//
// The CZT detector module sends one 26-bit "native" frame per read. Its bit
// positions follow the published frame diagram: bit 25 is an exist bit (an
// event is present), bits 24..17 the pixel ID (16x16 = 256 pixels), bits
// 16..5 the 12-bit pulse height (PHA), bits 4..1 reserved and bit 0 parity.
// The prose description of the same frame lists 8 pixel bits, 12 PHA bits,
// 5 reserved bits and a parity bit without the exist bit; the diagram's bit
// numbers are followed here.
//
// Every event leaves the readout as a 64-bit word: timestamp in 63..32,
// reserved 31..26, detector ID 25..24, pixel ID 23..16, reserved 15..13 and
// PHA in 12..0. The PHA field is 13 bits wide in the diagram while the PHA
// is 12 bits; it is zero-extended (bit 12 is always 0) - our choice.
//
// The parity convention is not published: this design takes the parity bit
// to make the XOR of all 26 bits even (parity = ^frame[25:1]).
package czt_pkg;

  localparam int unsigned NATIVE_BITS = 26;
  localparam int unsigned EVENT_BITS  = 64;
  localparam int unsigned TS_BITS     = 32;
  localparam int unsigned DETID_BITS  = 2;
  localparam int unsigned PIXEL_BITS  = 8;
  localparam int unsigned PHA_BITS    = 12;

  typedef logic [TS_BITS-1:0]    ts_t;
  typedef logic [DETID_BITS-1:0] detid_t;
  typedef logic [PIXEL_BITS-1:0] pixel_t;
  typedef logic [PHA_BITS-1:0]   pha_t;

  // Native 26-bit detector frame, MSB first on the wire.
  typedef struct packed {
    logic       exist;     // 25
    pixel_t     pixel;     // 24..17
    pha_t       pha;       // 16..5
    logic [3:0] rsvd;      // 4..1
    logic       parity;    // 0
  } native_frame_t;

  // 64-bit event word written to the trace buffer.
  typedef struct packed {
    ts_t        timestamp; // 63..32
    logic [5:0] rsvd_hi;   // 31..26
    detid_t     det_id;    // 25..24
    pixel_t     pixel;     // 23..16
    logic [2:0] rsvd_lo;   // 15..13
    logic [12:0] pha;      // 12..0 (12-bit PHA, zero-extended)
  } event_word_t;

  // Expected parity bit for a frame (even parity over all 26 bits).
  function automatic logic frame_parity(input native_frame_t f);
    return ^{f.exist, f.pixel, f.pha, f.rsvd};
  endfunction

  // Pack a native frame into the 64-bit event word.
  function automatic event_word_t make_event(input native_frame_t f, input ts_t ts,
                                             input detid_t id);
    event_word_t e;
    e.timestamp = ts;
    e.rsvd_hi   = '0;
    e.det_id    = id;
    e.pixel     = f.pixel;
    e.rsvd_lo   = '0;
    e.pha       = {1'b0, f.pha};
    return e;
  endfunction

endpackage
