// tactile_pkg: types and constants shared by the self-capacitance tactile
// sensing pipeline.
//
// The five touch classes are the ones the classifier reports (no touch,
// touch, slow tapping, fast tapping, hitting). Their 3-bit encoding, the
// fixed-point format of the relative capacitance change and the UART sync
// byte are this design's own choices.
package tactile_pkg;

  // Classes reported to the host. Encoding is this design's choice.
  typedef enum logic [2:0] {
    CLS_NO_TOUCH = 3'd0,
    CLS_TOUCH    = 3'd1,
    CLS_SLOW_TAP = 3'd2,
    CLS_FAST_TAP = 3'd3,
    CLS_HIT      = 3'd4
  } touch_class_e;

  // Fractional bits of the relative change dC/C0 (per sensor and summed).
  localparam int unsigned FRAC_BITS = 8;

  // Width of the summed relative change: 100 sensors of up to 16 bits each.
  localparam int unsigned SUM_W = 24;

  // Width of the frame counters used for event duration and interval.
  localparam int unsigned FRAME_CNT_W = 12;

  // First byte of every result packet on the UART.
  localparam logic [7:0] PKT_SYNC = 8'hA5;

  // Features of one finished touch event, in frames and Q(SUM_W-8).8 units.
  typedef struct packed {
    logic [FRAME_CNT_W-1:0] duration;  // frames the summed change stayed above threshold
    logic [SUM_W-1:0]       peak;      // largest summed change during the event
    logic [FRAME_CNT_W-1:0] interval;  // frames from the previous event's start to this one's
  } event_feat_t;

  // Converts a time in milliseconds into whole frames at a sampling rate.
  function automatic int unsigned ms_to_frames(int unsigned ms, int unsigned sample_hz);
    return (ms * sample_hz) / 1000;
  endfunction

endpackage
