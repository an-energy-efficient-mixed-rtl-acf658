// Pulse processing (PP) circuit.
//
// Forms the signed sum of the two VTC pulses in the time domain:
//   VPP = (VPUL ^ VPULN) | VPULP.
// VPUL is a reference pulse whose width stands for a zero result; VPULN starts
// together with it and is never longer, so VPUL ^ VPULN is high for
// width(VPUL) - width(VPULN). VPULP arrives at another time, so the OR adds its
// width: width(VPP) = width(VPUL) - width(VPULN) + width(VPULP).
// The published text names an XNOR for the subtraction; with pulses that idle
// low an XNOR would hold VPP high between pulses, so the difference is formed
// here with an XOR (the equivalent of an XNOR on active-low pulses).
// Combinational gates, no clock.
`timescale 1ns / 1fs
module pulse_processor (
  input  logic vpul,   // reference pulse
  input  logic vpuln,  // pulse from VTCN (negative partial sum)
  input  logic vpulp,  // pulse from VTCP (positive partial sum)
  output logic vpp     // to the integrator
);

  always_comb vpp = (vpul ^ vpuln) | vpulp;

endmodule
