// Shared constants and types of the stochastic-computing mixed-signal MAC engine.
//
// The engine multiplies 26 signed input pairs (a 5x5 kernel plus a bias) in the
// deterministic stochastic-computing domain. A feature-map value is coded as an
// 11-bit unary stream (magnitude 0..11), a weight as a 4-bit unary stream
// (magnitude 0..4); both streams are repeated to 44 = 4 x 11 bits so that every
// bit of one sees every bit of the other once, and an AND gate per bit position
// forms the product. The numbers 26, 11, 4, 44 and 6 (feature maps accumulated)
// are those of the published design. The binary widths of the magnitudes and the
// phase encoding of the sequencer are this implementation's own choices.
`timescale 1ns / 1fs
package sc_mac_pkg;

  localparam int unsigned N_IN   = 26;  // input pairs per MAC: 5x5 kernel + bias
  localparam int unsigned LEN_A  = 11;  // stream length of a feature-map value
  localparam int unsigned LEN_B  = 4;   // stream length of a weight
  localparam int unsigned LEN    = LEN_A * LEN_B;  // extended stream length, 44
  localparam int unsigned N_MAPS = 6;   // feature maps accumulated by the integrator

  // Binary magnitude widths wide enough for 0..LEN_A and 0..LEN_B.
  localparam int unsigned AW = $clog2(LEN_A + 1);  // 4
  localparam int unsigned BW = $clog2(LEN_B + 1);  // 3

  // One clock per phase. A MAC operation is the NEG stage followed by the POS
  // stage; each stage runs RESET, CHARGE, SHARE and then SAMPLE, in which the
  // stage's VTC tracks VSAC and then starts its pulse.
  typedef enum logic [3:0] {
    PH_IDLE     = 4'd0,
    PH_N_RESET  = 4'd1,
    PH_N_CHARGE = 4'd2,
    PH_N_SHARE  = 4'd3,
    PH_N_SAMPLE = 4'd4,
    PH_P_RESET  = 4'd5,
    PH_P_CHARGE = 4'd6,
    PH_P_SHARE  = 4'd7,
    PH_P_SAMPLE = 4'd8
  } phase_e;

endpackage
