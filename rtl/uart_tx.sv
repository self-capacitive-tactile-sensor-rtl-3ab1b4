// uart_tx: 8N1 serial transmitter.
//
// A byte offered with in_valid is taken when in_ready is high and sent as
// one start bit (0), eight data bits LSB first and one stop bit (1), each
// CLK_HZ/BAUD clocks long; the line idles high. With the 12 MHz clock and
// 2 Mbaud every bit lasts exactly 6 clocks, a byte 60 clocks. in_ready goes
// high in the last clock of the stop bit, so back-to-back bytes leave no
// idle time between them.
//
// Follows the paper: 2 Mbaud UART output to the host. The 8N1 frame is this
// design's choice (the paper does not give the frame format).
module uart_tx #(
  parameter int unsigned CLK_HZ = 12_000_000,
  parameter int unsigned BAUD   = 2_000_000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_data,
  output logic       txd
);

  localparam int unsigned CPB   = CLK_HZ / BAUD;
  localparam int unsigned CPB_W = (CPB > 1) ? $clog2(CPB) : 1;

  logic [CPB_W-1:0] baud_cnt;
  logic [3:0]       bit_idx;   // 0 start, 1..8 data, 9 stop
  logic [9:0]       shreg;
  logic             busy;

  logic last_tick;
  assign last_tick = busy && (bit_idx == 4'd9) && (baud_cnt == CPB_W'(CPB - 1));
  assign in_ready  = !busy || last_tick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      baud_cnt <= '0;
      bit_idx  <= '0;
      shreg    <= '1;
      txd      <= 1'b1;
    end else if (!busy || last_tick) begin
      txd  <= 1'b1;
      busy <= 1'b0;
      if (in_valid) begin
        busy     <= 1'b1;
        shreg    <= {1'b1, in_data, 1'b0};
        txd      <= 1'b0;
        baud_cnt <= '0;
        bit_idx  <= '0;
      end
    end else begin
      if (baud_cnt == CPB_W'(CPB - 1)) begin
        baud_cnt <= '0;
        bit_idx <= bit_idx + 1'b1;
        txd     <= shreg[bit_idx + 1'b1];
      end else begin
        baud_cnt <= baud_cnt + 1'b1;
      end
    end
  end

  // Producer rule: a byte offered and not yet taken stays offered.
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_data));

endmodule
