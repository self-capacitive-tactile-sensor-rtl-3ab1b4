// pad_rc_model: behavioural model of N electrodes, each charged from Vcc
// through its own resistor and read by a digital input.
//
// Not synthesizable logic: it stands in for the analog pads of the sensing
// sheet and the pull-up resistors in testbenches. While pad_oe[i] is 1 the
// pin drives the electrode to 0 V (discharged at once). When it is released
// the electrode charges along Vc(t) = Vcc(1 - exp(-t/RC)) and the input reads
// 1 from the clock at which Vc reaches the 0.6 Vcc input threshold, i.e.
// after t = RC ln(1/0.4) = 0.916 RC. The testbench gives that time directly,
// in clock cycles, per pad (thr_cycles), so it can model a touch by raising
// it. cycles_for_cap() converts a capacitance into such a time.
module pad_rc_model #(
  parameter int unsigned N = 100
) (
  input  logic        clk,
  input  logic [N-1:0] pad_oe,
  input  int unsigned thr_cycles [N],
  output logic [N-1:0] pad_in
);

  int unsigned elapsed [N];

  initial for (int i = 0; i < N; i++) elapsed[i] = 32'hFFFF_FFFF;

  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (pad_oe[i])                     elapsed[i] <= 0;
      else if (elapsed[i] != 32'hFFFF_FFFF) elapsed[i] <= elapsed[i] + 1;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) pad_in[i] = (elapsed[i] >= thr_cycles[i]);
  end

endmodule
