// tb_result_packetizer: self-checking test of the result packet framing.
//
// Triggers packets with random classes and sums (some above the Q8.8 range,
// which must saturate to FFFF) under a randomly stalling consumer, and checks
// each 4-byte packet: A5, class, sum integer byte, sum fraction byte. A
// trigger while a packet is in flight must be dropped and counted.
module tb_result_packetizer;
  import tactile_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic trigger = 0, out_valid, out_ready = 0;
  touch_class_e cls = CLS_NO_TOUCH;
  logic [SUM_W-1:0] frame_sum = '0;
  logic [7:0] out_data, dropped;

  result_packetizer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] exp_q [$];
  int got = 0;

  always @(posedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(exp_q.size() != 0, "no unexpected byte");
    if (exp_q.size() != 0) begin
      logic [7:0] e;
      e = exp_q.pop_front();
      check(out_data == e, $sformatf("byte %0d: %02h expected %02h", got, out_data, e));
    end
    got++;
  end

  initial begin
    int exp_drop = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      logic [15:0] q88;
      @(negedge clk);
      cls = touch_class_e'($urandom_range(0, 4));
      frame_sum = ($urandom_range(0, 3) == 0) ? SUM_W'($urandom_range(65536, 1 << 23))
                                              : SUM_W'($urandom_range(0, 65535));
      q88 = (frame_sum > 24'hFFFF) ? 16'hFFFF : frame_sum[15:0];
      exp_q.push_back(8'hA5);
      exp_q.push_back({5'b0, cls});
      exp_q.push_back(q88[15:8]);
      exp_q.push_back(q88[7:0]);
      trigger = 1;
      @(negedge clk);
      trigger = 0;
      if (p % 10 == 5) begin
        // A second trigger while busy must be dropped.
        trigger = 1; cls = CLS_HIT; frame_sum = '0;
        @(negedge clk);
        trigger = 0;
        exp_drop++;
      end
      wait (!out_valid);
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    repeat (10) @(posedge clk);
    check(exp_q.size() == 0, "all bytes sent");
    check(got == 240, $sformatf("%0d bytes sent", got));
    check(dropped == 8'(exp_drop), $sformatf("dropped %0d expected %0d", dropped, exp_drop));
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
