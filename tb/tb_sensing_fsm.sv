// tb_sensing_fsm: self-checking test of the charge-time measurement.
//
// Eight pads with known charge times (in cycles after release) are measured
// over several frames. Expected count = charge time + 2 (the input
// synchronizer); a pad that never rises must read CHARGE_TIMEOUT. Also checks
// the frame period, the discharge length, that pads are released during
// charge, and the order and last flag of the output stream.
module tb_sensing_fsm;
  localparam int unsigned N       = 8;
  localparam int unsigned CNT_W   = 12;
  localparam int unsigned CLK_HZ  = 12_000;
  localparam int unsigned SHZ     = 10;          // 1200-cycle frames
  localparam int unsigned DIS     = 20;
  localparam int unsigned TIMEOUT = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] pad_in, pad_oe;
  logic s_valid, s_last, frame_start;
  logic [2:0] s_idx;
  logic [CNT_W-1:0] s_count;
  int unsigned thr [N];

  sensing_fsm #(.N_SENSORS(N), .CNT_W(CNT_W), .CLK_HZ(CLK_HZ), .SAMPLE_HZ(SHZ),
                .DISCHARGE_CYCLES(DIS), .CHARGE_TIMEOUT(TIMEOUT)) dut (.*);
  pad_rc_model #(.N(N)) pads (.clk, .pad_oe, .thr_cycles(thr), .pad_in);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, last_start = -1, oe_run = 0, frames = 0, exp_idx = 0;
  always @(posedge clk) cyc++;

  // Discharge length and frame period monitors.
  always @(posedge clk) if (rst_n) begin
    if (pad_oe != '0) begin
      check(pad_oe == '1, "all pads discharged together");
      oe_run++;
    end else if (oe_run != 0) begin
      check(oe_run == DIS, $sformatf("discharge lasted %0d cycles", oe_run));
      oe_run = 0;
    end
    if (frame_start) begin
      if (last_start >= 0)
        check(cyc - last_start == CLK_HZ / SHZ, $sformatf("frame period %0d", cyc - last_start));
      last_start = cyc;
    end
    if (s_valid) begin
      int unsigned e;
      e = (thr[s_idx] + 2 > TIMEOUT) ? TIMEOUT : thr[s_idx] + 2;
      check(s_idx == exp_idx, "stream order");
      check(s_count == CNT_W'(e), $sformatf("pad %0d count %0d expected %0d", s_idx, s_count, e));
      check(s_last == (s_idx == N - 1), "last flag");
      exp_idx = (s_idx == N - 1) ? 0 : exp_idx + 1;
      if (s_last) begin
        frames++;
        // New charge times for the next frame, one pad never rising.
        for (int i = 0; i < N; i++) thr[i] = 30 + $urandom_range(0, 400);
        thr[frames % N] = 5000;
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) thr[i] = 40 + 37 * i;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (frames == 6);
    repeat (5) @(posedge clk);
    check(frames == 6, "frames measured");
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
