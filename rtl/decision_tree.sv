// decision_tree: touch classifier over the event features.
//
// A fixed binary decision tree turns the features of each finished touch
// event into one of the five classes, and tracks contact that lasts:
//
//   event ended (event_done):
//     duration >= TOUCH_MS            -> NO_TOUCH  (a sustained touch let go)
//     duration >= DUR_SPLIT_MS        -> SLOW_TAP
//     interval <  IVL_SPLIT_MS        -> FAST_TAP
//     peak     >= HIT_PEAK            -> HIT       (short, isolated, strong)
//     otherwise                       -> TOUCH     (short, isolated, light)
//   event running and duration >= TOUCH_MS -> TOUCH
//   no event: the last tap class is held HOLD_MS, then NO_TOUCH.
//
// The comparisons are made in frames (ms * SAMPLE_HZ / 1000). The split
// values for duration and interval are the midpoints between the slow-tap
// and fast-tap means measured for this sensor (280 ms / 32 ms duration,
// 602 ms / 160 ms interval). A tap that starts a fast train has no recent
// predecessor, so it is classed by its amplitude like a hit; the following
// taps of the train are fast taps.
//
// Timing: one decision per frame; cls and decided are registered, so
// cls_valid pulses one clock after frame_valid. decided pulses with it when
// the frame ended an event.
//
// The paper deploys a decision tree over event duration, peak amplitude and
// inter-event interval with these five classes; its trained tree is not
// given, so this tree's shape and thresholds are this design's own.
module decision_tree
  import tactile_pkg::*;
#(
  parameter int unsigned      SAMPLE_HZ    = 100,
  parameter int unsigned      DUR_SPLIT_MS = 156,
  parameter int unsigned      IVL_SPLIT_MS = 381,
  parameter int unsigned      TOUCH_MS     = 1000,
  parameter int unsigned      HOLD_MS      = 500,
  parameter logic [SUM_W-1:0] HIT_PEAK     = SUM_W'(5 << FRAC_BITS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   frame_valid,
  input  logic                   active,
  input  logic [FRAME_CNT_W-1:0] cur_dur,
  input  logic                   event_done,
  input  event_feat_t            ev,
  output touch_class_e           cls,
  output logic                   cls_valid,
  output logic                   decided
);

  localparam logic [FRAME_CNT_W-1:0] DUR_FR   = FRAME_CNT_W'(ms_to_frames(DUR_SPLIT_MS, SAMPLE_HZ));
  localparam logic [FRAME_CNT_W-1:0] IVL_FR   = FRAME_CNT_W'(ms_to_frames(IVL_SPLIT_MS, SAMPLE_HZ));
  localparam logic [FRAME_CNT_W-1:0] TOUCH_FR = FRAME_CNT_W'(ms_to_frames(TOUCH_MS, SAMPLE_HZ));
  localparam logic [FRAME_CNT_W-1:0] HOLD_FR  = FRAME_CNT_W'(ms_to_frames(HOLD_MS, SAMPLE_HZ));

  // The tree proper, evaluated on the finished event.
  touch_class_e leaf;
  always_comb begin
    if (ev.duration >= TOUCH_FR)      leaf = CLS_NO_TOUCH;
    else if (ev.duration >= DUR_FR)   leaf = CLS_SLOW_TAP;
    else if (ev.interval < IVL_FR)    leaf = CLS_FAST_TAP;
    else if (ev.peak >= HIT_PEAK)     leaf = CLS_HIT;
    else                              leaf = CLS_TOUCH;
  end

  logic [FRAME_CNT_W-1:0] hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cls       <= CLS_NO_TOUCH;
      cls_valid <= 1'b0;
      decided   <= 1'b0;
      hold      <= '0;
    end else begin
      cls_valid <= frame_valid;
      decided   <= frame_valid && event_done;
      if (frame_valid) begin
        if (event_done) begin
          cls  <= leaf;
          hold <= HOLD_FR;
        end else if (active) begin
          if (cur_dur >= TOUCH_FR) cls <= CLS_TOUCH;
        end else if (hold != '0) begin
          hold <= hold - 1'b1;
        end else begin
          cls <= CLS_NO_TOUCH;
        end
      end
    end
  end

endmodule
