// tb_tactile_top: end-to-end test of the whole tactile sensing design at its
// default parameters (100 pads, 12 MHz, 100 frames/s, 2 Mbaud).
//
// A 10 x 10 sheet of RC pads is modelled with capacitances of 9.5..12 pF
// behind 10 MOhm (about 1000..1300 clocks to the 0.6 Vcc threshold). A finger
// adds 40 % to the pads it covers (3 x 3 pads); a hit adds 50 % to 4 x 4 pads.
// The script, in 10 ms frames, after 10 idle frames (8 of calibration):
//   two slow taps (28 frames on, 32 off), 60 idle,
//   three fast taps (3 on, 13 off), 68 idle,
//   one hit (3 frames), 55 idle,
//   one held touch (110 frames), 20 idle.
// Frames must start exactly 120000 clocks apart. The UART line is decoded;
// every packet must start with A5, leave before the next frame starts, and
// carry the summed dC/C0 the testbench computes from the pad model for its
// frame. The class
// sequence (repeats removed) must be
//   no touch, slow tap, no touch, touch, fast tap, no touch, hit, no touch,
//   touch, no touch.
// Each mechanism is counted and must occur: calibration, every class, the
// charge phase ending early once all pads have risen, the divider and its
// skip path, event classification, the expiry of a tap label and a long
// press reported while held; no overrun or dropped packet may occur.
module tb_tactile_top;
  import tactile_pkg::*;
  localparam int N = 100;
  localparam real R_OHM = 10.0e6, CLK_HZ = 12.0e6;

  logic clk = 0, rst_n = 0;
  always #41.667ns clk = ~clk;

  logic [N-1:0] pad_in, pad_oe;
  logic uart_txd, class_valid, calibrated, overrun;
  logic [7:0] pkt_dropped;
  touch_class_e touch_class;
  int unsigned thr [N];

  tactile_top dut (.*);
  pad_rc_model #(.N(N)) pads (.clk, .pad_oe, .thr_cycles(thr), .pad_in);

  logic rx_valid, rx_err;
  logic [7:0] rx_data;
  longint rx_start;
  uart_rx_model #(.CPB(6)) rx (.clk, .en(rst_n), .rxd(uart_txd), .valid(rx_valid),
                               .data(rx_data), .frame_err(rx_err), .start_cycle(rx_start));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Charge time to 0.6 Vcc: t = R C ln(1/0.4).
  function automatic int unsigned cycles_for_cap(real c_farad);
    return int'(R_OHM * c_farad * $ln(1.0 / 0.4) * CLK_HZ);
  endfunction

  // ---------------- Script ----------------
  typedef enum {P_NONE, P_FINGER, P_HIT} pattern_e;
  pattern_e script [$];
  real c0 [N];
  int unsigned base_thr [N];
  int exp_sum [$];   // expected summed change of each measured frame

  task automatic add(pattern_e p, int n);
    repeat (n) script.push_back(p);
  endtask

  function automatic bit covered(pattern_e p, int i);
    int r = i / 10, c = i % 10;
    if (p == P_FINGER) return r >= 2 && r <= 4 && c >= 2 && c <= 4;
    if (p == P_HIT)    return r >= 5 && r <= 8 && c >= 5 && c <= 8;
    return 0;
  endfunction

  // Sets the pads for frame f and records the sum the design must report.
  task automatic apply_frame(int f);
    pattern_e p;
    int s = 0;
    p = (f < script.size()) ? script[f] : P_NONE;
    for (int i = 0; i < N; i++) begin
      real c;
      c = c0[i];
      if (covered(p, i)) c = c0[i] * ((p == P_HIT) ? 1.5 : 1.4);
      thr[i] = cycles_for_cap(c);
      if (thr[i] > base_thr[i])
        s += ((thr[i] - base_thr[i]) * 256) / (base_thr[i] + 2);  // counts are thr + 2
    end
    exp_sum.push_back(s);
  endtask

  // ---------------- Frame tracking ----------------
  int frame = 0;
  logic oe_q = 0;
  longint cyc = 0, frame_cycle [$];
  always @(posedge clk) begin
    cyc++;
    oe_q <= pad_oe[0];
    if (rst_n && pad_oe[0] && !oe_q) begin
      if (frame_cycle.size() != 0)
        check(cyc - frame_cycle[$] == 120000, $sformatf("frame period %0d", cyc - frame_cycle[$]));
      frame_cycle.push_back(cyc);
      // A new frame's discharge began: set the pads it will measure.
      frame++;
      apply_frame(frame);
    end
  end

  // ---------------- Mechanism counters ----------------
  // How often each mechanism of the design fired, seen through the hierarchy.
  int n_early_charge = 0, n_div = 0, n_skip = 0, n_events = 0, n_hold_expiry = 0, n_long_touch = 0;
  touch_class_e cls_q = CLS_NO_TOUCH;
  always @(posedge clk) if (rst_n) begin
    // CHARGE ended because every pad had risen, before the timeout.
    if (dut.u_sense.state == 2'd2 /* S_CHARGE */ && &(dut.u_sense.done | dut.u_sense.sync2))
      n_early_charge++;
    // A touched pad went through the divider; an untouched one skipped it.
    if (dut.u_feat.state == 2'd0 /* F_WAIT */ && dut.u_feat.in_valid) begin
      if (dut.u_feat.add_en) n_skip++;
      else                   n_div++;
    end
    if (dut.u_tree.decided) n_events++;
    if (class_valid) begin
      // A tap label that times out to no touch without a new event.
      if (cls_q inside {CLS_SLOW_TAP, CLS_FAST_TAP, CLS_HIT} && touch_class == CLS_NO_TOUCH &&
          !dut.u_tree.decided)
        n_hold_expiry++;
      // A press long enough to be reported while it lasts.
      if (cls_q != CLS_TOUCH && touch_class == CLS_TOUCH && !dut.u_tree.decided)
        n_long_touch++;
      cls_q = touch_class;
    end
  end

  // ---------------- Packet decoding ----------------
  logic [7:0] pkt [4];
  int byte_i = 0, packets = 0, n_seen [5];
  longint pkt_start, lat, max_lat = 0;
  touch_class_e seq [$];

  always @(posedge clk) if (rx_valid) begin
    check(!rx_err, "UART stop bit");
    if (byte_i == 0) pkt_start = rx_start;
    pkt[byte_i] = rx_data;
    byte_i++;
    if (byte_i == 4) begin
      touch_class_e c;
      int e;
      byte_i = 0;
      check(pkt[0] == PKT_SYNC, "sync byte");
      check(pkt[1] <= 4, "class code");
      c = touch_class_e'(pkt[1][2:0]);
      n_seen[c]++;
      if (seq.size() == 0 || seq[$] != c) seq.push_back(c);
      // Packet k describes measurement 9 + k (measurements 1..8 calibrate)
      // and must leave before the next measurement begins.
      lat = pkt_start - frame_cycle[8 + packets];
      check(lat > 0 && lat < 120000, $sformatf("packet %0d latency %0d clocks", packets, lat));
      if (lat > max_lat) max_lat = lat;
      e = exp_sum[9 + packets];
      if (e > 65535) e = 65535;
      check({pkt[2], pkt[3]} == 16'(e),
            $sformatf("packet %0d sum %0d expected %0d", packets, {pkt[2], pkt[3]}, e));
      packets++;
    end
  end

  initial begin
    touch_class_e exp_seq [$];
    for (int i = 0; i < N; i++) begin
      c0[i] = 9.5e-12 + 2.5e-12 * real'((i * 37) % 100) / 100.0;
      base_thr[i] = cycles_for_cap(c0[i]);
    end
    add(P_NONE, 10);
    repeat (2) begin add(P_FINGER, 28); add(P_NONE, 32); end
    add(P_NONE, 28);
    repeat (3) begin add(P_FINGER, 3); add(P_NONE, 13); end
    add(P_NONE, 55);
    add(P_HIT, 3); add(P_NONE, 55);
    add(P_FINGER, 110); add(P_NONE, 20);
    apply_frame(0);

    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (frame == script.size());
    repeat (10000) @(posedge clk);

    exp_seq = '{CLS_NO_TOUCH, CLS_SLOW_TAP, CLS_NO_TOUCH, CLS_TOUCH, CLS_FAST_TAP,
                CLS_NO_TOUCH, CLS_HIT, CLS_NO_TOUCH, CLS_TOUCH, CLS_NO_TOUCH};
    check(seq == exp_seq, "class sequence");
    foreach (seq[i]) $display("class[%0d] = %s", i, seq[i].name());
    check(calibrated, "calibration happened");
    $display("mechanisms: early charge end %0d, divisions %0d, skipped pads %0d, events %0d, hold expiries %0d, long presses %0d",
             n_early_charge, n_div, n_skip, n_events, n_hold_expiry, n_long_touch);
    check(n_early_charge == frame, "every frame's charge ended when all pads had risen");
    check(n_div > 0 && n_skip > 0, "divider used and skipped");
    check(n_events == 7, "seven events classified (2 slow, 3 fast, 1 hit, 1 press)");
    check(n_hold_expiry == 3, "tap labels expired three times");
    check(n_long_touch == 1, "one long press reported while held");
    for (int c = 0; c < 5; c++)
      check(n_seen[c] > 0, $sformatf("class %s reported", touch_class_e'(c)));
    $display("largest frame-start to packet latency: %0d clocks", max_lat);
    check(packets == frame - 8, $sformatf("%0d packets for %0d frames", packets, frame));
    check(!overrun, "no buffer overrun");
    check(pkt_dropped == 0, "no dropped packet");
    $display("frames %0d packets %0d: no_touch %0d touch %0d slow %0d fast %0d hit %0d",
             frame, packets, n_seen[0], n_seen[1], n_seen[2], n_seen[3], n_seen[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
