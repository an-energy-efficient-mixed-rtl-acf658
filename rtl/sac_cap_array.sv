// Behavioural model of the SAC capacitor array (analog, not synthesizable).
//
// N_IN x LEN equal unit capacitors C share one top plate, the VSAC node. The
// bottom plate of capacitor (i,j) is grounded through an NMOS switch driven by
// d[i][j]; RST grounds the top plate and ION (active low, a PMOS) ties it to
// VDD. Used in the order RESET -> CHARGE -> SHARE:
//   RST high              : capacitors whose switch is closed are discharged;
//   ION active            : top plate at VDD, capacitors with a closed switch
//                           charge to VDD, the others (floating bottom) do not;
//   both off (SHARE)      : the charge of the connected capacitors is shared,
//                           VSAC = VDD * (n_charged + NP) / (n_connected + NP).
// NP is the top-node parasitic capacitance in units of C; it also charges to
// VDD while ION is active. The published array spans 0.41 V (no capacitor
// charged) to 1.0 V (all charged), and NP is set from that lower end:
// NP = NCAP * VSAC_ZERO / (VDD - VSAC_ZERO). This keeps VSAC above the 0.35 V
// needed by the VTC. Charge on capacitors whose switch is open is kept and does
// not reach the node, which is exact for the RESET/CHARGE/SHARE order above.
// The array structure and its control signals follow the published circuit;
// the parasitic term is this model's way to reproduce the published range.
`timescale 1ns / 1fs
module sac_cap_array #(
  parameter int unsigned N_IN      = sc_mac_pkg::N_IN,
  parameter int unsigned LEN       = sc_mac_pkg::LEN,
  parameter real         VDD       = 1.0,
  parameter real         VSAC_ZERO = 0.41
) (
  input  logic [N_IN-1:0][LEN-1:0] d,     // bottom-plate switches Di[j]
  input  logic                     rst,   // RST: top plate to ground
  input  logic                     ion,   // ION: top plate to VDD, active low
  output real                      vsac   // shared top-plate voltage
);

  localparam int unsigned NCAP = N_IN * LEN;
  localparam real         NP   = real'(NCAP) * VSAC_ZERO / (VDD - VSAC_ZERO);

  logic [N_IN-1:0][LEN-1:0] q;   // capacitor holds charge C*VDD
  logic                     qp;  // parasitic holds charge

  initial begin
    q    = '0;
    qp   = 1'b0;
    vsac = 0.0;
  end

  always @(d or rst or ion) begin
    if (rst) begin
      q    = q & ~d;
      qp   = 1'b0;
      vsac = 0.0;
    end else if (!ion) begin
      q    = q | d;
      qp   = 1'b1;
      vsac = VDD;
    end else begin
      vsac = VDD * (real'($countones(q & d)) + (qp ? NP : 0.0))
                 / (real'($countones(d)) + NP);
    end
  end

endmodule
