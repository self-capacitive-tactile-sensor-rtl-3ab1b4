// uart_rx_model: testbench receiver for an 8N1 line with CPB clocks per bit.
//
// Finds the falling edge of a start bit, samples every bit in the middle of
// its bit time and reports each byte with a one-clock pulse on valid, along
// with the clock count at which its start bit began and a framing error flag
// (stop bit read as 0 or start bit not 0 at mid-bit).
module uart_rx_model #(
  parameter int unsigned CPB = 6
) (
  input  logic       clk,
  input  logic       en,     // ignore the line until it is valid
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err,
  output longint     start_cycle
);
  longint cyc = 0;
  logic   busy = 0, prev = 1;
  int     cnt = 0;
  logic [9:0] bits;

  initial begin valid = 0; data = 0; frame_err = 0; start_cycle = 0; end

  always @(posedge clk) begin
    cyc++;
    valid <= 0;
    prev  <= rxd;
    if (!busy) begin
      if (en && prev && !rxd) begin
        busy <= 1; cnt <= 1; start_cycle <= cyc;
      end
    end else begin
      cnt <= cnt + 1;
      if (cnt % CPB == CPB / 2) bits[cnt / CPB] <= rxd;
      if (cnt == 9 * CPB + CPB / 2) begin
        busy      <= 0;
        valid     <= 1;
        data      <= bits[8:1];
        frame_err <= bits[0] || !rxd;
      end
    end
  end
endmodule
