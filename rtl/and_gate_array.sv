// AND gate array: deterministic stochastic multiplication of N_IN pairs.
//
// For every pair i the LEN_A-bit feature code and the LEN_B-bit weight code are
// each repeated periodically to LEN_A*LEN_B = 44 bits (bit j of the extended
// streams is a[j mod LEN_A] and b[j mod LEN_B]). Because 11 and 4 are coprime,
// every bit of one stream meets every bit of the other exactly once, so the
// number of ones in the 44-bit AND product is exactly |A|*|B|. One AND gate per
// bit, 26 x 44 = 1144 gates, as in the published design. Combinational.
`timescale 1ns / 1fs
module and_gate_array #(
  parameter int unsigned N_IN  = sc_mac_pkg::N_IN,
  parameter int unsigned LEN_A = sc_mac_pkg::LEN_A,
  parameter int unsigned LEN_B = sc_mac_pkg::LEN_B,
  parameter int unsigned LEN   = LEN_A * LEN_B
) (
  input  logic [N_IN-1:0][LEN_A-1:0] code_a,  // from Decoder-A
  input  logic [N_IN-1:0][LEN_B-1:0] code_b,  // from Decoder-B
  output logic [N_IN-1:0][LEN-1:0]   din      // product streams DINi[j]
);

  always_comb begin
    for (int unsigned i = 0; i < N_IN; i++) begin
      for (int unsigned j = 0; j < LEN; j++) begin
        din[i][j] = code_a[i][j % LEN_A] & code_b[i][j % LEN_B];
      end
    end
  end

endmodule
