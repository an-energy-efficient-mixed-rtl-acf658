// Behavioural model of the voltage-to-time converter (VTC; analog, not
// synthesizable). Two instances serve as VTCN and VTCP.
//
// Sampling phase (en = 1, enb = 0): the sampling capacitor tracks vin.
// Discharging phase (en = 0): the capacitor is discharged by a constant current
// equal to the charging current, so the comparator output stays high for a time
// proportional to the held voltage; the output is that comparator output ANDed
// with ENB, the complement of en, generated inside. Pulse width =
// NS_PER_V * vin. The published converter is linear from 0.35 V to 1.0 V with
// pulses of a few ns to about 10 ns; NS_PER_V = 10 ns/V is this model's round
// choice in that range, and the small offset of the real circuit is left out.
// The pulse starts at the falling edge of en. A new rising edge of en ends it.
// vhold is a sample-and-hold by intent, so lint reports it as a latch.
`timescale 1ns / 1fs
module vtc #(
  parameter real NS_PER_V = 10.0
) (
  input  real  vin,   // voltage to convert (VSAC)
  input  logic en,    // EN: sampling phase when high
  output logic vpul   // output pulse
);

  real  vhold;
  logic ramp;

  initial begin
    vhold = 0.0;
    ramp  = 1'b0;
  end

  always @(vin or en) if (en) vhold = vin;

  always @(negedge en) begin
    ramp = 1'b1;
    #(NS_PER_V * vhold) ramp = 1'b0;
  end

  assign vpul = ramp & ~en;

endmodule
