// sample_buffer: frame store and no-touch baseline for every sensor.
//
// The charge counts of one frame arrive as a stream, one sensor per clock
// (in_valid/in_idx/in_count/in_last), and are written into a frame memory.
// The first 2**BASE_LOG2 frames after reset are also summed per sensor into
// a baseline memory; their mean is the sensor's untouched charge count C0.
// After calibration, each complete frame is played back in sensor order as
// (count, baseline) pairs on a valid/ready stream, one pair per accepted
// handshake, with out_last on the last sensor. During calibration nothing is
// played back and calibrated stays 0.
//
// Timing: playback starts the cycle after in_last and takes at least N
// cycles; the consumer sets the pace. A frame that arrives while playback is
// still running overwrites the memory; overrun flags it (it cannot happen
// with the frame periods this design uses).
//
// The paper names a sample buffer between the sensing FSM and the feature
// extraction but does not describe it; the memories, the averaged baseline
// and the stream handshake are this design's choices.
module sample_buffer #(
  parameter int unsigned N_SENSORS = 100,
  parameter int unsigned CNT_W     = 16,
  parameter int unsigned BASE_LOG2 = 3,
  localparam int unsigned IDX_W    = (N_SENSORS > 1) ? $clog2(N_SENSORS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  logic [CNT_W-1:0] in_count,
  input  logic             in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [CNT_W-1:0] out_count,
  output logic [CNT_W-1:0] out_base,
  output logic             out_last,
  output logic             calibrated,
  output logic             overrun
);

  localparam int unsigned ACC_W = CNT_W + BASE_LOG2;

  logic [CNT_W-1:0] frame_mem [N_SENSORS];
  logic [ACC_W-1:0] base_mem  [N_SENSORS];

  logic [BASE_LOG2:0] cal_frames;  // frames summed so far
  logic               playing;
  logic [IDX_W-1:0]   rd_idx;

  assign calibrated = (cal_frames == (BASE_LOG2+1)'(1 << BASE_LOG2));

  always_ff @(posedge clk) begin
    if (in_valid) begin
      frame_mem[in_idx] <= in_count;
      if (!calibrated) begin
        if (cal_frames == '0) base_mem[in_idx] <= ACC_W'(in_count);
        else                  base_mem[in_idx] <= base_mem[in_idx] + ACC_W'(in_count);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cal_frames <= '0;
      playing    <= 1'b0;
      rd_idx     <= '0;
      overrun    <= 1'b0;
    end else begin
      if (in_valid && in_last) begin
        if (!calibrated) cal_frames <= cal_frames + 1'b1;
        else begin
          playing <= 1'b1;
          rd_idx  <= '0;
        end
        if (playing) overrun <= 1'b1;
      end else if (playing && out_ready) begin
        if (rd_idx == IDX_W'(N_SENSORS - 1)) playing <= 1'b0;
        else                                  rd_idx  <= rd_idx + 1'b1;
      end
    end
  end

  logic [ACC_W-1:0] acc;
  assign acc       = base_mem[rd_idx];
  assign out_valid = playing;
  assign out_count = frame_mem[rd_idx];
  assign out_base  = CNT_W'(acc >> BASE_LOG2);
  assign out_last  = playing && (rd_idx == IDX_W'(N_SENSORS - 1));

  // A pair offered and not taken stays offered, unchanged.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready && !in_valid |=> out_valid && $stable(out_count) && $stable(out_base));

endmodule
