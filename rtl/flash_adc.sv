// Behavioural model of the flash ADC (mixed-signal, not synthesizable).
//
// 2^BITS - 1 comparators compare vin with a resistor ladder between VLO and VHI
// (thresholds at VLO + (k - 0.5) * LSB, LSB = (VHI - VLO) / 2^BITS); the
// thermometer code is counted into a binary code, which rounds to the nearest
// level and saturates at 0 and 2^BITS - 1. The result is registered at the
// rising clock edge that ends a cycle with `sample` high, and `valid` marks the
// following cycle. The published design only names a flash ADC; the resolution,
// the input range and the sampling handshake are this model's choices.
`timescale 1ns / 1fs
module flash_adc #(
  parameter int unsigned BITS = 8,
  parameter real         VLO  = 0.0,
  parameter real         VHI  = 1.0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            sample,
  input  real             vin,
  output logic [BITS-1:0] y,
  output logic            valid
);

  localparam int unsigned LEVELS = 1 << BITS;
  localparam real         LSB    = (VHI - VLO) / real'(LEVELS);

  logic [BITS-1:0] code;

  always_comb begin
    code = '0;
    for (int unsigned k = 1; k < LEVELS; k++) begin
      if (vin >= VLO + (real'(k) - 0.5) * LSB) code = BITS'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y     <= '0;
      valid <= 1'b0;
    end else begin
      valid <= sample;
      if (sample) y <= code;
    end
  end

endmodule
