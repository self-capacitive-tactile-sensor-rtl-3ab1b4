// tb_uart_tx: self-checking test of the 2 Mbaud transmitter.
//
// Sends 200 random bytes, some back to back and some with idle gaps, at the
// default 12 MHz / 2 Mbaud (6 clocks per bit). A receiver model samples the
// line mid-bit and must see every byte in order with a good stop bit; bytes
// sent back to back must start exactly 60 clocks apart.
module tb_uart_tx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, txd;
  logic [7:0] in_data = 0;

  uart_tx dut (.*);

  logic rx_valid, rx_err;
  logic [7:0] rx_data;
  longint rx_start, prev_start = -1;
  uart_rx_model #(.CPB(6)) rx (.clk, .en(rst_n), .rxd(txd), .valid(rx_valid), .data(rx_data),
                               .frame_err(rx_err), .start_cycle(rx_start));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] q [$];
  bit b2b [$];
  int received = 0;

  always @(posedge clk) if (rx_valid) begin
    logic [7:0] e;
    bit back;
    e = q.pop_front();
    back = b2b.pop_front();
    check(rx_data == e, $sformatf("byte %0d: got %02h expected %02h", received, rx_data, e));
    check(!rx_err, "stop bit");
    if (back && prev_start >= 0)
      check(rx_start - prev_start == 60, $sformatf("byte spacing %0d", rx_start - prev_start));
    prev_start = rx_start;
    received++;
  end

  initial begin
    check(txd == 1'b1 || !rst_n, "idle high");
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);
    check(txd == 1'b1, "line idles high");
    for (int i = 0; i < 200; i++) begin
      int gap;
      gap = ($urandom_range(0, 3) == 0) ? $urandom_range(1, 100) : 0;
      repeat (gap) @(negedge clk);
      @(negedge clk);
      in_valid = 1;
      in_data = 8'($urandom);
      q.push_back(in_data);
      b2b.push_back(gap == 0 && i != 0);
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      #1 in_valid = 0;
    end
    wait (received == 200);
    repeat (20) @(posedge clk);
    check(txd == 1'b1, "line idles high at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
