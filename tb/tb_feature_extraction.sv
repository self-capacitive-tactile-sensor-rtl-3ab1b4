// tb_feature_extraction: self-checking test of the summed relative change
// and the event features.
//
// Plays frames of 5 (count, baseline) pairs into the block with a randomly
// stalling producer. The reference computes each sensor's change as
// floor((count - base) * 256 / base) (0 if count <= base), sums them, and
// tracks events (sum >= 2.0) on its own: duration in frames, peak sum and
// start-to-start interval (4095 for the first event). The frame pattern holds
// idle frames, long and short events and events at short and long spacing.
module tb_feature_extraction;
  import tactile_pkg::*;
  localparam int unsigned N = 5, CNT_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_last = 0;
  logic [CNT_W-1:0] in_count = 0, in_base = 0;
  logic frame_valid, active, event_done;
  logic [SUM_W-1:0] frame_sum;
  logic [FRAME_CNT_W-1:0] cur_dur;
  event_feat_t ev;

  feature_extraction #(.CNT_W(CNT_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int fv_count = 0, frames_sent = 0;
  bit ed_seen = 0;
  always @(posedge clk) if (rst_n && frame_valid) begin fv_count++; ed_seen = event_done; end

  // Reference state.
  int unsigned exp_sum;
  bit  ref_active = 0;
  int unsigned ref_dur = 0, ref_peak = 0, ref_ivl = 0, ref_since = 4095, events = 0;

  task automatic play_frame(input bit touched);
    exp_sum = 0;
    for (int i = 0; i < N; i++) begin
      logic [CNT_W-1:0] b, c;
      b = CNT_W'(800 + $urandom_range(0, 700));
      if (touched && i < 3) c = b + CNT_W'($urandom_range(100, 600));
      else                  c = b - CNT_W'($urandom_range(0, 20));   // noise below baseline
      if (i == 4 && touched) c = 16'hFFFF;                            // timed-out pad
      if (c > b) exp_sum += ((c - b) << FRAC_BITS) / b;
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      @(negedge clk);
      in_valid = 1; in_count = c; in_base = b; in_last = (i == N - 1);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    in_last = 0;
    wait (fv_count == frames_sent + 1);
    frames_sent++;
    @(negedge clk);
    check(frame_sum == SUM_W'(exp_sum), $sformatf("frame_sum %0d exp %0d", frame_sum, exp_sum));
    // Reference event tracking.
    if (exp_sum >= 512) begin
      if (!ref_active) begin
        ref_dur = 1; ref_peak = exp_sum;
        ref_ivl = (ref_since == 4095) ? 4095 : ref_since + 1; ref_since = 0;
      end else begin
        ref_dur++; if (exp_sum > ref_peak) ref_peak = exp_sum;
        if (ref_since != 4095) ref_since++;
      end
      check(!ed_seen, "no event end while active");
      check(cur_dur == FRAME_CNT_W'(ref_dur), "cur_dur");
      ref_active = 1;
    end else begin
      check(ed_seen == ref_active, "event_done at end of event");
      if (ref_active) begin
        events++;
        check(ev.duration == FRAME_CNT_W'(ref_dur), $sformatf("duration %0d exp %0d", ev.duration, ref_dur));
        check(ev.peak == SUM_W'(ref_peak), "peak");
        check(ev.interval == FRAME_CNT_W'(ref_ivl), $sformatf("interval %0d exp %0d", ev.interval, ref_ivl));
      end
      ref_active = 0;
      if (ref_since != 4095) ref_since++;
    end
    check(active == ref_active, "active flag");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) play_frame(0);
    repeat (6) play_frame(1);   // long event
    repeat (3) play_frame(0);
    repeat (2) play_frame(1);   // short event, interval 9
    play_frame(0);
    play_frame(1);              // short event, interval 3
    repeat (4) play_frame(0);
    check(events == 3, "three events seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
