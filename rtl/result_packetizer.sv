// result_packetizer: one result packet per frame for the host.
//
// On every trigger pulse (one per frame, from the classifier) it captures the
// class and the frame's summed relative change and offers four bytes, in
// order, on a valid/ready byte stream to the UART transmitter:
//   byte 0  tactile_pkg::PKT_SYNC (0xA5)
//   byte 1  class code in bits 2:0 (tactile_pkg::touch_class_e), 0 above
//   byte 2  summed dC/C0, unsigned Q8.8, integer part (saturates at 255.996)
//   byte 3  summed dC/C0, fractional part
// A trigger that arrives while a packet is still being sent is dropped and
// counted in dropped (saturating). At 2 Mbaud a packet takes 240 clocks of
// 12 MHz, far less than a 100 Hz frame.
//
// The paper sends the classification result from the FPGA to the host over
// a 2 Mbaud UART but gives no packet format; this format is this design's.
module result_packetizer
  import tactile_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             trigger,
  input  touch_class_e     cls,
  input  logic [SUM_W-1:0] frame_sum,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [7:0]       out_data,
  output logic [7:0]       dropped
);

  logic [1:0]  byte_idx;
  logic [7:0]  cls_byte;
  logic [15:0] sum_q88;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      byte_idx  <= '0;
      cls_byte  <= '0;
      sum_q88   <= '0;
      dropped   <= '0;
    end else begin
      if (out_valid && out_ready) begin
        if (byte_idx == 2'd3) out_valid <= 1'b0;
        byte_idx <= byte_idx + 1'b1;
      end
      if (trigger) begin
        if (out_valid) begin
          if (dropped != 8'hFF) dropped <= dropped + 1'b1;
        end else begin
          out_valid <= 1'b1;
          byte_idx  <= '0;
          cls_byte  <= {5'b0, cls};
          sum_q88   <= (frame_sum[SUM_W-1:16] != '0) ? 16'hFFFF : frame_sum[15:0];
        end
      end
    end
  end

  always_comb begin
    unique case (byte_idx)
      2'd0:    out_data = PKT_SYNC;
      2'd1:    out_data = cls_byte;
      2'd2:    out_data = sum_q88[15:8];
      default: out_data = sum_q88[7:0];
    endcase
  end

  // A byte offered and not taken stays offered, unchanged.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
