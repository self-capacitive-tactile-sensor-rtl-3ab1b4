// sensing_fsm: charge-time measurement of all self-capacitance electrodes.
//
// Each electrode hangs between a pull-up resistor to Vcc and an FPGA pin.
// Once per frame the FSM walks IDLE -> DISCHARGE -> CHARGE -> READY:
//   IDLE      pins released; waits for the frame timer (CLK_HZ/SAMPLE_HZ cycles).
//   DISCHARGE every pin drives 0 for DISCHARGE_CYCLES to empty the electrodes.
//   CHARGE    every pin is released (high impedance); the electrodes charge
//             through their resistors. One shared counter counts clock cycles;
//             when a pin first reads 1 (about 0.6 Vcc) its count is latched.
//             The phase ends when all pins read 1 or after CHARGE_TIMEOUT
//             cycles; a pin that never rose keeps CHARGE_TIMEOUT.
//   READY     the N counts are streamed out one per clock (idx 0..N-1,
//             last on idx N-1), then back to IDLE.
// Pins are measured in parallel, so a frame costs DISCHARGE_CYCLES plus the
// slowest charge time plus N cycles, far below the frame period.
//
// Interface: pad_oe[i]=1 drives pin i low (the pad driver's data input is
// tied to 0); pad_in is the raw, asynchronous pin level and passes through a
// two-flop synchronizer, which adds a constant two cycles to every count.
//
// Follows the paper: charge-and-measure RC timing, counting clock cycles
// from the start of charging to the 0->1 toggle, the IDLE/Discharge/Charge/
// "Sensor value ready" states, 100 channels, 12 MHz clock, 100 Hz frames.
// This design's own choices: the pin is driven low to discharge and left
// high impedance to charge (the paper labels the discharge state "high
// impedance", which cannot empty a pad charged through a pull-up), the
// discharge length, the timeout, the shared counter and the streamed output.
module sensing_fsm #(
  parameter int unsigned N_SENSORS        = 100,
  parameter int unsigned CNT_W            = 16,
  parameter int unsigned CLK_HZ           = 12_000_000,
  parameter int unsigned SAMPLE_HZ        = 100,
  parameter int unsigned DISCHARGE_CYCLES = 1200,
  parameter int unsigned CHARGE_TIMEOUT   = (1 << CNT_W) - 1,
  localparam int unsigned IDX_W           = (N_SENSORS > 1) ? $clog2(N_SENSORS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N_SENSORS-1:0] pad_in,      // raw pin levels
  output logic [N_SENSORS-1:0] pad_oe,      // 1: drive pin low
  output logic                 s_valid,     // one count per cycle in READY
  output logic [IDX_W-1:0]     s_idx,
  output logic [CNT_W-1:0]     s_count,
  output logic                 s_last,
  output logic                 frame_start  // pulse when a measurement begins
);

  localparam int unsigned FRAME_CYCLES = CLK_HZ / SAMPLE_HZ;
  localparam int unsigned TMR_W = $clog2(FRAME_CYCLES + 1);

  typedef enum logic [1:0] {S_IDLE, S_DISCHARGE, S_CHARGE, S_READY} state_e;
  state_e state;

  logic [TMR_W-1:0]     frame_tmr;
  logic [CNT_W-1:0]     phase_cnt;
  logic [N_SENSORS-1:0] sync1, sync2, done;
  logic [CNT_W-1:0]     counts [N_SENSORS];
  logic [IDX_W-1:0]     idx;

  // Free-running frame timer: one measurement every FRAME_CYCLES clocks.
  logic frame_tick;
  assign frame_tick = (frame_tmr == TMR_W'(FRAME_CYCLES - 1));
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          frame_tmr <= '0;
    else if (frame_tick) frame_tmr <= '0;
    else                 frame_tmr <= frame_tmr + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1 <= '0;
      sync2 <= '0;
    end else begin
      sync1 <= pad_in;
      sync2 <= sync1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      phase_cnt <= '0;
      done      <= '0;
      idx       <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (frame_tick) begin
            state     <= S_DISCHARGE;
            phase_cnt <= '0;
          end
        end
        S_DISCHARGE: begin
          if (phase_cnt == CNT_W'(DISCHARGE_CYCLES - 1)) begin
            state     <= S_CHARGE;
            phase_cnt <= '0;
            done      <= '0;
          end else begin
            phase_cnt <= phase_cnt + 1'b1;
          end
        end
        S_CHARGE: begin
          // The synchronizer still shows discharge-time lows for the first
          // two cycles, so a pin is only trusted once it reads 1 here.
          done <= done | sync2;
          if ((&(done | sync2)) || phase_cnt == CNT_W'(CHARGE_TIMEOUT)) begin
            state <= S_READY;
            idx   <= '0;
          end else begin
            phase_cnt <= phase_cnt + 1'b1;
          end
        end
        S_READY: begin
          if (idx == IDX_W'(N_SENSORS - 1)) state <= S_IDLE;
          else                               idx   <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Per-channel latch of the shared counter at the first high reading.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N_SENSORS; i++) begin
      if (state == S_DISCHARGE)
        counts[i] <= CNT_W'(CHARGE_TIMEOUT);
      else if (state == S_CHARGE && !done[i] && sync2[i])
        counts[i] <= phase_cnt;
    end
  end

  assign pad_oe      = {N_SENSORS{state == S_DISCHARGE}};
  assign s_valid     = (state == S_READY);
  assign s_idx       = idx;
  assign s_count     = counts[idx];
  assign s_last      = (state == S_READY) && (idx == IDX_W'(N_SENSORS - 1));
  assign frame_start = (state == S_IDLE) && frame_tick;

  // Pads are never driven while their counts are being read out.
  a_no_drive_in_readout: assert property (@(posedge clk) disable iff (!rst_n)
    s_valid |-> pad_oe == '0);

endmodule
