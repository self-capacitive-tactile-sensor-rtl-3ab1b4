// feature_extraction: summed relative capacitance change and touch-event
// features.
//
// For every (count, baseline) pair of a frame it forms the relative change
// of that sensor, dC/C0 = (count - C0) / C0, clamped at 0 from below, in
// fixed point with tactile_pkg::FRAC_BITS fractional bits. The charge time of
// an RC pad to the input threshold is proportional to C, so the ratio of
// counts equals the ratio of capacitances. The division is a restoring
// divider, one quotient bit per clock (CNT_W+FRAC_BITS clocks per sensor;
// sensors with no increase skip it). The per-sensor changes are summed into
// frame_sum, the quantity plotted over time for slow taps, fast taps and hits.
//
// A frame whose sum reaches ON_THRESH is "active". A run of active frames is
// one touch event. For each event the block reports, in frames, its duration
// and the interval from the previous event's start to its start, and its
// peak summed change: the three features the classifier uses. While an event
// is running, cur_dur gives its length so far.
//
// Timing: in_ready is high while the block waits for a pair. One clock after
// the last pair of a frame has been processed, frame_valid pulses for one
// clock with frame_sum, active and cur_dur updated; event_done pulses in the
// same clock when the frame ended an event, with the event's features in ev.
// The outputs hold until the next frame.
//
// Follows the paper: dC/C0 per sensor summed over the sheet; event duration,
// peak amplitude and inter-event interval as features. This design's own
// choices: the fixed-point format, the threshold that defines an event, the
// start-to-start interval and the saturating frame counters.
module feature_extraction
  import tactile_pkg::*;
#(
  parameter int unsigned CNT_W     = 16,
  parameter logic [SUM_W-1:0] ON_THRESH = SUM_W'(2 << FRAC_BITS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [CNT_W-1:0]       in_count,
  input  logic [CNT_W-1:0]       in_base,
  input  logic                   in_last,
  output logic                   frame_valid,
  output logic [SUM_W-1:0]       frame_sum,
  output logic                   active,
  output logic [FRAME_CNT_W-1:0] cur_dur,
  output logic                   event_done,
  output event_feat_t            ev
);

  localparam int unsigned DIV_W = CNT_W + FRAC_BITS;
  localparam logic [FRAME_CNT_W-1:0] CNT_MAX = '1;

  typedef enum logic [1:0] {F_WAIT, F_DIV, F_ADD} fstate_e;
  fstate_e state;

  logic [CNT_W-1:0]       rem;
  logic [DIV_W-1:0]       quo;
  logic [CNT_W-1:0]       divisor;
  logic [$clog2(DIV_W+1)-1:0] bit_cnt;
  logic                   last_q;
  logic [SUM_W-1:0]       acc;
  logic [FRAME_CNT_W-1:0] since_start;

  assign in_ready = (state == F_WAIT);

  // One restoring-division step.
  logic [CNT_W:0] rem_sh;
  logic           fits;
  assign rem_sh = {rem, quo[DIV_W-1]};
  assign fits   = (rem_sh >= {1'b0, divisor});

  // Value added to the frame sum this cycle and the sum it gives.
  logic             add_en;
  logic [SUM_W-1:0] addend, sum_next;
  always_comb begin
    add_en = 1'b0;
    addend = '0;
    if (state == F_WAIT && in_valid && (in_count <= in_base || in_base == '0)) begin
      add_en = 1'b1;  // no increase (or no baseline): contributes nothing
    end else if (state == F_ADD) begin
      add_en = 1'b1;
      addend = SUM_W'(quo);
    end
    sum_next = acc + addend;
  end

  logic frame_end;
  assign frame_end = add_en && ((state == F_WAIT) ? in_last : last_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= F_WAIT;
      rem         <= '0;
      quo         <= '0;
      divisor     <= '0;
      bit_cnt     <= '0;
      last_q      <= 1'b0;
      acc         <= '0;
      frame_valid <= 1'b0;
      frame_sum   <= '0;
      active      <= 1'b0;
      cur_dur     <= '0;
      event_done  <= 1'b0;
      ev          <= '0;
      since_start <= CNT_MAX;
    end else begin
      frame_valid <= 1'b0;
      event_done  <= 1'b0;
      unique case (state)
        F_WAIT: begin
          if (in_valid && !(in_count <= in_base || in_base == '0)) begin
            state   <= F_DIV;
            rem     <= '0;
            quo     <= DIV_W'(in_count - in_base) << FRAC_BITS;
            divisor <= in_base;
            bit_cnt <= '0;
            last_q  <= in_last;
          end
        end
        F_DIV: begin
          rem     <= CNT_W'(fits ? (rem_sh - {1'b0, divisor}) : rem_sh);
          quo     <= {quo[DIV_W-2:0], fits};
          bit_cnt <= bit_cnt + 1'b1;
          if (bit_cnt == ($bits(bit_cnt))'(DIV_W - 1)) state <= F_ADD;
        end
        F_ADD:   state <= F_WAIT;
        default: state <= F_WAIT;
      endcase

      if (add_en) acc <= frame_end ? '0 : sum_next;

      // Per-frame event tracking on the completed sum.
      if (frame_end) begin
        frame_valid <= 1'b1;
        frame_sum   <= sum_next;
        active      <= (sum_next >= ON_THRESH);
        if (sum_next >= ON_THRESH) begin
          if (!active) begin
            // Event starts.
            cur_dur     <= FRAME_CNT_W'(1);
            ev.peak     <= sum_next;
            ev.interval <= (since_start == CNT_MAX) ? CNT_MAX : since_start + 1'b1;
            since_start <= '0;
          end else begin
            if (cur_dur != CNT_MAX) cur_dur <= cur_dur + 1'b1;
            if (sum_next > ev.peak) ev.peak <= sum_next;
            if (since_start != CNT_MAX) since_start <= since_start + 1'b1;
          end
        end else begin
          if (active) begin
            // Event ends: report its features.
            event_done  <= 1'b1;
            ev.duration <= cur_dur;
          end
          cur_dur <= '0;
          if (since_start != CNT_MAX) since_start <= since_start + 1'b1;
        end
      end
    end
  end

  // Producer rule: a pair offered and not yet taken stays offered.
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_count) && $stable(in_base));

endmodule
