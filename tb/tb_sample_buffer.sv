// tb_sample_buffer: self-checking test of the frame store and baseline.
//
// Streams random frames of 6 sensors into the buffer. The first 4 frames
// (BASE_LOG2 = 2) must produce no playback and leave the mean of each sensor
// as its baseline; every later frame must be played back in order with that
// baseline, under a consumer that stalls at random.
module tb_sample_buffer;
  localparam int unsigned N = 6, CNT_W = 16, BL = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_last = 0, out_valid, out_ready, out_last, calibrated, overrun;
  logic [2:0] in_idx = 0;
  logic [CNT_W-1:0] in_count = 0, out_count, out_base;

  sample_buffer #(.N_SENSORS(N), .CNT_W(CNT_W), .BASE_LOG2(BL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned acc [N];
  logic [CNT_W-1:0] frame [N];
  int rd = 0, played = 0;

  always @(posedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(out_count == frame[rd], $sformatf("count[%0d]=%0d exp %0d", rd, out_count, frame[rd]));
    check(out_base == CNT_W'(acc[rd] >> BL), $sformatf("base[%0d]=%0d exp %0d", rd, out_base, acc[rd] >> BL));
    check(out_last == (rd == N - 1), "last flag");
    rd = (rd == N - 1) ? 0 : rd + 1;
    if (rd == 0) played++;
  end

  task automatic send_frame(input bit cal);
    for (int i = 0; i < N; i++) begin
      frame[i] = CNT_W'(900 + $urandom_range(0, 600));
      if (cal) acc[i] += frame[i];
      @(negedge clk);
      in_valid = 1; in_idx = 3'(i); in_count = frame[i]; in_last = (i == N - 1);
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) acc[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < (1 << BL); f++) begin
      check(!calibrated, "not calibrated yet");
      send_frame(1);
      repeat (20) @(posedge clk);
      check(!out_valid && played == 0, "no playback during calibration");
    end
    check(calibrated, "calibrated after 4 frames");
    for (int f = 0; f < 5; f++) begin
      send_frame(0);
      wait (!out_valid);
      repeat (3) @(posedge clk);
      check(played == f + 1, "frame played back");
    end
    check(!overrun, "no overrun");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
