// Switch control of the stochastic-to-analog converter (SAC).
//
// Each of the N_IN x LEN unit capacitors has a bottom-plate switch driven by
//   Di[j] = ((SINi ? SIGN : SIGP) & DINi[j]) | PUP.
// SINi is the sign of pair i; SIGN and SIGP are the stage enables of the NEG and
// POS stages. During the CHARGE phase of the NEG stage only the switches of
// negative pairs whose product bit is 1 are closed, and likewise for positive
// pairs in the POS stage. PUP closes every switch (RESET and SHARE phases). The
// mux/AND/OR structure is the one of the published design; that SINi = 1 marks a
// negative pair and selects SIGN is this implementation's choice. Combinational.
`timescale 1ns / 1fs
module sac_switch_logic #(
  parameter int unsigned N_IN = sc_mac_pkg::N_IN,
  parameter int unsigned LEN  = sc_mac_pkg::LEN
) (
  input  logic [N_IN-1:0]          sin,   // pair sign, 1 = negative
  input  logic [N_IN-1:0][LEN-1:0] din,   // product bits from the AND gate array
  input  logic                     sign,  // NEG-stage charge enable (SIGN_SAC)
  input  logic                     sigp,  // POS-stage charge enable (SIGP_SAC)
  input  logic                     pup,   // close all switches
  output logic [N_IN-1:0][LEN-1:0] d      // switch gates Di[j]
);

  always_comb begin
    for (int unsigned i = 0; i < N_IN; i++) begin
      for (int unsigned j = 0; j < LEN; j++) begin
        d[i][j] = ((sin[i] ? sign : sigp) & din[i][j]) | pup;
      end
    end
  end

endmodule
