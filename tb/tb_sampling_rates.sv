// tb_sampling_rates: the sampling-rate comparison (10 Hz, 100 Hz, 1 kHz) on
// one touch script.
//
// Three copies of the design, identical except for SAMPLE_HZ, watch the same
// 100-pad sheet. The script has five slow taps (280 ms contact every 600 ms),
// five fast taps (32 ms every 160 ms) and five hits (30 ms, a larger and
// stronger contact, one per second): the mean durations and intervals
// measured for this kind of sensor. Contact changes at fixed times, not at
// frame boundaries, so a slow frame rate can miss short contacts entirely.
//
// To keep the run short the clock is scaled down tenfold (1.2 MHz, 200 kbaud,
// 60-clock discharge, 400-clock timeout), which keeps 6 clocks per UART bit
// and leaves a 1 kHz frame (1200 clocks) enough time for the measurement.
// Pads charge in about 100..130 clocks. Pad 0 is disconnected and never
// rises, so every frame's charge phase ends at the timeout; its baseline is
// the timeout too, so it adds nothing to the summed change.
//
// Expected, from the classifier rules: at 100 Hz and 1 kHz every contact is
// seen, giving 5 slow taps, 4 fast taps (the first of the series has no close
// predecessor and is light, so it is reported as a touch) and 5 hits. At
// 10 Hz fewer than 15 events are seen and no fast tap or hit is recognised:
// every seen event spans at least one 100 ms frame, so it counts as slow.
module tb_sampling_rates;
  import tactile_pkg::*;
  localparam int N = 100;
  localparam int unsigned CLK_HZ = 1_200_000;
  localparam real R_OHM = 10.0e6;
  localparam int NR = 3;
  localparam int unsigned RATE [NR] = '{10, 100, 1000};

  logic clk = 0, rst_n = 0;
  always #416.667ns clk = ~clk;

  int unsigned thr [N];
  logic [N-1:0] pad_in [NR], pad_oe [NR];
  logic txd [NR], cv [NR], cal [NR], ovr [NR];
  logic [7:0] drop [NR];
  touch_class_e tc [NR];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_cls [NR][5];
  int n_timeout [NR];

  for (genvar r = 0; r < NR; r++) begin : g_rate
    tactile_top #(.CLK_HZ(CLK_HZ), .SAMPLE_HZ(RATE[r]), .BAUD(200_000),
                  .DISCHARGE_CYCLES(60), .CHARGE_TIMEOUT(400)) dut (
      .clk, .rst_n, .pad_in(pad_in[r]), .pad_oe(pad_oe[r]), .uart_txd(txd[r]),
      .touch_class(tc[r]), .class_valid(cv[r]), .calibrated(cal[r]),
      .overrun(ovr[r]), .pkt_dropped(drop[r]));
    pad_rc_model #(.N(N)) pads (.clk, .pad_oe(pad_oe[r]), .thr_cycles(thr), .pad_in(pad_in[r]));
    // Every classified event, as the classifier decides it.
    always @(posedge clk) if (rst_n && dut.u_tree.decided) n_cls[r][dut.u_tree.cls]++;
    // Charge phases cut off by the timeout (the disconnected pad).
    always @(posedge clk)
      if (rst_n && dut.u_sense.state == 2'd2 /* S_CHARGE */ && dut.u_sense.phase_cnt == 16'd400)
        n_timeout[r]++;
  end

  // ---------------- Touch script, in microseconds ----------------
  typedef enum {P_NONE, P_FINGER, P_HIT} pattern_e;
  typedef struct { longint t0; longint t1; pattern_e p; } contact_t;
  contact_t contacts [$];
  real c0 [N];

  function automatic int unsigned cycles_for_cap(real c_farad);
    return int'(R_OHM * c_farad * $ln(1.0 / 0.4) * real'(CLK_HZ));
  endfunction

  function automatic bit covered(pattern_e p, int i);
    int r = i / 10, c = i % 10;
    if (p == P_FINGER) return r >= 2 && r <= 4 && c >= 2 && c <= 4;
    if (p == P_HIT)    return r >= 5 && r <= 8 && c >= 5 && c <= 8;
    return 0;
  endfunction

  longint cyc = 0;
  pattern_e cur = P_NONE;
  always @(posedge clk) begin
    longint us;
    pattern_e p;
    cyc++;
    us = cyc * 1_000_000 / CLK_HZ;
    p = P_NONE;
    foreach (contacts[k]) if (us >= contacts[k].t0 && us < contacts[k].t1) p = contacts[k].p;
    if (p != cur) begin
      cur = p;
      for (int i = 1; i < N; i++)
        thr[i] = cycles_for_cap(covered(p, i) ? c0[i] * ((p == P_HIT) ? 1.5 : 1.4) : c0[i]);
    end
  end

  initial begin
    longint t;
    for (int i = 0; i < N; i++) begin
      c0[i] = 9.5e-12 + 2.5e-12 * real'((i * 37) % 100) / 100.0;
      thr[i] = cycles_for_cap(c0[i]);
    end
    thr[0] = 1_000_000;                                 // pad 0 is disconnected
    t = 1_000_000;                                      // 1 s idle, calibration
    for (int k = 0; k < 5; k++) begin contacts.push_back('{t, t + 280_000, P_FINGER}); t += 602_000; end
    t += 600_000;
    for (int k = 0; k < 5; k++) begin contacts.push_back('{t, t + 32_000, P_FINGER}); t += 160_000; end
    t += 1_000_000;
    for (int k = 0; k < 5; k++) begin contacts.push_back('{t, t + 30_000, P_HIT}); t += 1_000_000; end
    t += 1_000_000;

    repeat (5) @(posedge clk);
    rst_n = 1;
    wait (cyc * 1_000_000 / CLK_HZ >= t);

    for (int r = 0; r < NR; r++) begin
      int total;
      total = 0;
      for (int c = 0; c < 5; c++) total += n_cls[r][c];
      $display("%0d Hz: events %0d (no_touch %0d touch %0d slow %0d fast %0d hit %0d)",
               RATE[r], total, n_cls[r][0], n_cls[r][1], n_cls[r][2], n_cls[r][3], n_cls[r][4]);
      check(cal[r], "calibrated");
      check(n_timeout[r] > 0, $sformatf("%0d Hz: charge timeout used (%0d frames)", RATE[r], n_timeout[r]));
      check(!ovr[r] && drop[r] == 0, $sformatf("%0d Hz: no lost frame or packet", RATE[r]));
      if (RATE[r] == 10) begin
        check(total < 15, "10 Hz misses short contacts");
        check(n_cls[r][CLS_FAST_TAP] == 0 && n_cls[r][CLS_HIT] == 0, "10 Hz cannot tell fast taps or hits");
      end else begin
        check(total == 15, $sformatf("%0d Hz sees all 15 contacts", RATE[r]));
        check(n_cls[r][CLS_SLOW_TAP] == 5, $sformatf("%0d Hz: 5 slow taps", RATE[r]));
        check(n_cls[r][CLS_FAST_TAP] == 4, $sformatf("%0d Hz: 4 fast taps", RATE[r]));
        check(n_cls[r][CLS_TOUCH] == 1, $sformatf("%0d Hz: first fast tap as touch", RATE[r]));
        check(n_cls[r][CLS_HIT] == 5, $sformatf("%0d Hz: 5 hits", RATE[r]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
