// tactile_top: self-capacitance tactile sensing and touch classification on
// one FPGA.
//
// Up to N_SENSORS fabric or FPC electrodes, each tied to Vcc through its own
// large resistor, connect straight to FPGA pins. Every frame (SAMPLE_HZ) the
// design empties all electrodes, lets them charge and counts the clock cycles
// each takes to read high; a touching finger adds capacitance and so cycles.
// The pipeline then runs entirely in the FPGA:
//
//   sensing_fsm -> sample_buffer -> feature_extraction -> decision_tree
//        -> result_packetizer -> uart_tx -> host
//
// sample_buffer also learns each sensor's untouched count during the first
// 2**BASE_LOG2 frames; feature_extraction turns counts into the summed
// relative change sum(dC/C0) and into per-event duration, peak and interval;
// decision_tree labels the activity no touch, touch, slow tap, fast tap or
// hit; one 4-byte packet per frame goes out at BAUD.
//
// Ports: pad_in/pad_oe are the two halves of the bidirectional pad cells
// (pad_oe=1 must make the pad cell drive 0; the cells themselves, e.g. the
// vendor's tristate I/O primitive, sit outside this module). uart_txd goes to
// the host. touch_class, class_valid and calibrated are also brought out for
// on-board indicators; overrun and pkt_dropped report lost data (both stay 0
// at the default rates).
//
// Timing: one frame every CLK_HZ/SAMPLE_HZ clocks (120000 at the defaults).
// A class is decided a few thousand clocks after the frame's charge phase
// ends (about 26 clocks per touched sensor) and its packet follows at once.
//
// The chain of blocks, the 100 channels, the 12 MHz clock, 100 Hz frames
// and 2 Mbaud follow the paper; the interfaces between the blocks are this
// design's own.
module tactile_top
  import tactile_pkg::*;
#(
  parameter int unsigned N_SENSORS        = 100,
  parameter int unsigned CNT_W            = 16,
  parameter int unsigned CLK_HZ           = 12_000_000,
  parameter int unsigned SAMPLE_HZ        = 100,
  parameter int unsigned BAUD             = 2_000_000,
  parameter int unsigned DISCHARGE_CYCLES = 1200,
  parameter int unsigned CHARGE_TIMEOUT   = (1 << CNT_W) - 1,
  parameter int unsigned BASE_LOG2        = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_SENSORS-1:0] pad_in,
  output logic [N_SENSORS-1:0] pad_oe,
  output logic                 uart_txd,
  output touch_class_e         touch_class,
  output logic                 class_valid,
  output logic                 calibrated,
  output logic                 overrun,      // a frame arrived during playback
  output logic [7:0]           pkt_dropped   // packets lost to a busy UART
);

  localparam int unsigned IDX_W = (N_SENSORS > 1) ? $clog2(N_SENSORS) : 1;

  // sensing_fsm -> sample_buffer
  logic             s_valid, s_last;
  logic [IDX_W-1:0] s_idx;
  logic [CNT_W-1:0] s_count;

  // sample_buffer -> feature_extraction
  logic             b_valid, b_ready, b_last;
  logic [CNT_W-1:0] b_count, b_base;

  // feature_extraction -> decision_tree
  logic                   f_valid, f_active, f_event_done;
  logic [SUM_W-1:0]       f_sum;
  logic [FRAME_CNT_W-1:0] f_cur_dur;
  event_feat_t            f_ev;

  // packetizer -> uart
  logic       p_valid, p_ready;
  logic [7:0] p_data;

  sensing_fsm #(
    .N_SENSORS       (N_SENSORS),
    .CNT_W           (CNT_W),
    .CLK_HZ          (CLK_HZ),
    .SAMPLE_HZ       (SAMPLE_HZ),
    .DISCHARGE_CYCLES(DISCHARGE_CYCLES),
    .CHARGE_TIMEOUT  (CHARGE_TIMEOUT)
  ) u_sense (
    .clk, .rst_n,
    .pad_in, .pad_oe,
    .s_valid, .s_idx, .s_count, .s_last,
    .frame_start()
  );

  sample_buffer #(
    .N_SENSORS(N_SENSORS),
    .CNT_W    (CNT_W),
    .BASE_LOG2(BASE_LOG2)
  ) u_buf (
    .clk, .rst_n,
    .in_valid (s_valid),
    .in_idx   (s_idx),
    .in_count (s_count),
    .in_last  (s_last),
    .out_valid(b_valid),
    .out_ready(b_ready),
    .out_count(b_count),
    .out_base (b_base),
    .out_last (b_last),
    .calibrated,
    .overrun
  );

  feature_extraction #(
    .CNT_W(CNT_W)
  ) u_feat (
    .clk, .rst_n,
    .in_valid   (b_valid),
    .in_ready   (b_ready),
    .in_count   (b_count),
    .in_base    (b_base),
    .in_last    (b_last),
    .frame_valid(f_valid),
    .frame_sum  (f_sum),
    .active     (f_active),
    .cur_dur    (f_cur_dur),
    .event_done (f_event_done),
    .ev         (f_ev)
  );

  decision_tree #(
    .SAMPLE_HZ(SAMPLE_HZ)
  ) u_tree (
    .clk, .rst_n,
    .frame_valid(f_valid),
    .active     (f_active),
    .cur_dur    (f_cur_dur),
    .event_done (f_event_done),
    .ev         (f_ev),
    .cls        (touch_class),
    .cls_valid  (class_valid),
    .decided    ()
  );

  result_packetizer u_pkt (
    .clk, .rst_n,
    .trigger  (class_valid),
    .cls      (touch_class),
    .frame_sum(f_sum),
    .out_valid(p_valid),
    .out_ready(p_ready),
    .out_data (p_data),
    .dropped  (pkt_dropped)
  );

  uart_tx #(
    .CLK_HZ(CLK_HZ),
    .BAUD  (BAUD)
  ) u_uart (
    .clk, .rst_n,
    .in_valid(p_valid),
    .in_ready(p_ready),
    .in_data (p_data),
    .txd     (uart_txd)
  );

endmodule
