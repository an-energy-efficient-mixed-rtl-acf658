// Binary-to-stochastic decoder (Decoder-A / Decoder-B).
//
// Converts an unsigned binary magnitude into a deterministic stochastic code of
// LEN bits: the lowest `mag` bits are 1 and the rest are 0 (thermometer code), so
// the fraction of ones is mag/LEN. Decoder-A (feature maps) uses LEN = 11 and
// Decoder-B (weights) LEN = 4, as in the published design. Magnitudes above LEN
// saturate to all ones. The published design only states that the conversion is
// done in parallel by a simple decoder; the thermometer form (ones first) follows
// the example codes drawn for the deterministic method (1100 for 2/4) and is this
// implementation's choice. Purely combinational, no clock.
`timescale 1ns / 1fs
module sc_decoder #(
  parameter int unsigned LEN = 11,
  parameter int unsigned W   = $clog2(LEN + 1)
) (
  input  logic [W-1:0]   mag,   // binary magnitude, 0..LEN
  output logic [LEN-1:0] code   // stochastic code, bit k = (k < mag)
);

  always_comb begin
    for (int unsigned k = 0; k < LEN; k++) begin
      code[k] = (k < 32'(mag));
    end
  end

endmodule
