// tb_decision_tree: self-checking test of the touch classifier.
//
// Generates a random sequence of touch events (durations 1..150 frames, gaps
// 1..90 frames, random peaks) at 100 frames/s and drives the classifier's
// inputs frame by frame, as the feature extractor would. An independent
// reference applies the documented rules with the default thresholds
// (15 / 38 / 100 / 50 frames, hit peak 5.0) and the class is compared every
// frame, including the cycle at which cls_valid arrives. Every class must
// occur at least once.
module tb_decision_tree;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frame_valid = 0, active = 0, event_done = 0, cls_valid, decided;
  logic [FRAME_CNT_W-1:0] cur_dur = 0;
  event_feat_t ev = '0;
  touch_class_e cls;

  decision_tree dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Reference model state.
  touch_class_e ref_cls = CLS_NO_TOUCH;
  int ref_hold = 0, since = 4095, seen [5];
  int dur = 0, peak = 0, ivl = 0;

  task automatic frame(input bit act, input bit done);
    @(negedge clk);
    frame_valid = 1; active = act; event_done = done;
    cur_dur = FRAME_CNT_W'(act ? dur : 0);
    ev.duration = FRAME_CNT_W'(dur); ev.peak = SUM_W'(peak); ev.interval = FRAME_CNT_W'(ivl);
    // Reference decision.
    if (done) begin
      if (dur >= 100)      ref_cls = CLS_NO_TOUCH;
      else if (dur >= 15)  ref_cls = CLS_SLOW_TAP;
      else if (ivl < 38)   ref_cls = CLS_FAST_TAP;
      else if (peak >= 1280) ref_cls = CLS_HIT;
      else                 ref_cls = CLS_TOUCH;
      ref_hold = 50;
    end else if (act) begin
      if (dur >= 100) ref_cls = CLS_TOUCH;
    end else if (ref_hold != 0) ref_hold--;
    else ref_cls = CLS_NO_TOUCH;
    @(posedge clk);
    #1;
    frame_valid = 0; event_done = 0;
    check(cls_valid, "cls_valid one clock after frame_valid");
    check(decided == done, "decided flag");
    check(cls == ref_cls, $sformatf("class %s expected %s (dur %0d ivl %0d peak %0d)",
                                    cls.name(), ref_cls.name(), dur, ivl, peak));
    seen[ref_cls]++;
    @(posedge clk);
    #1;
    check(!cls_valid, "cls_valid is a pulse");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 120; e++) begin
      int d, g, kind;
      kind = $urandom_range(0, 5);
      case (kind)
        0: d = $urandom_range(100, 150);  // held touch
        1, 2: d = $urandom_range(15, 40); // slow tap
        default: d = $urandom_range(1, 14);
      endcase
      g = (kind == 3) ? $urandom_range(1, 20) : $urandom_range(1, 90);
      peak = $urandom_range(600, 3000);
      ivl = (since == 4095) ? 4095 : since + 1;
      since = 0;
      for (int f = 1; f <= d; f++) begin
        dur = f;
        frame(1, 0);
        if (f != d) since++;
      end
      for (int f = 0; f < g; f++) begin
        since++;
        frame(0, f == 0);
      end
    end
    for (int c = 0; c < 5; c++)
      check(seen[c] > 0, $sformatf("class %0d occurred", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
