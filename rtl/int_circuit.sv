// Behavioural model of the integrating circuit (INT; analog, not synthesizable).
//
// While vpp is high a bipolar transistor charges the output capacitor with a
// constant current, so each pulse raises vout by GAIN_V_PER_NS times its width
// in ns; when vpp is low the transistor is cut off and vout holds. The RESET
// transistor (intrst high) discharges the capacitor; no charge is added while
// it is on. Successive pulses add up, which accumulates the MAC results of
// successive feature maps. The constant-current integration and the reset
// follow the published circuit; the gain of 4 mV/ns is this model's choice, of
// the order of the published charging curve (tens of mV over about 20 ns).
`timescale 1ns / 1fs
module int_circuit #(
  parameter real GAIN_V_PER_NS = 4.0e-3
) (
  input  logic vpp,     // charging pulse from the PP circuit
  input  logic intrst,  // INTRST: discharge the capacitor
  output real  vout     // VINT
);

  realtime t_rise;

  initial begin
    vout   = 0.0;
    t_rise = 0.0;
  end

  always @(posedge vpp) t_rise = $realtime;

  always @(negedge vpp or posedge intrst) begin
    if (intrst) vout = 0.0;
    else        vout = vout + GAIN_V_PER_NS * ($realtime - t_rise);
  end

endmodule
