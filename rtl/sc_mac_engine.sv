// Mixed-signal stochastic-computing MAC engine (top level).
//
// Computes Y = sum over N_MAPS feature maps of sum over N_IN pairs of
// S_i * |A_i| * |B_i| and digitises it. Data path per feature map:
//   Decoder-A / Decoder-B  binary magnitudes -> 11-bit / 4-bit unary codes
//   AND gate array         codes repeated to 44 bits and ANDed: |A_i|*|B_i| ones
//   SAC switch logic       selects the negative pairs in the NEG stage and the
//                          positive pairs in the POS stage
//   SAC capacitor array    charge sharing: VSACN, then VSACP (one array, reused)
//   VTCN / VTCP            voltages -> pulse widths VPULN, VPULP
//   PP                     VPP width = VPUL - VPULN + VPULP (signed sum)
//   INT                    VINT grows by the VPP width; kept across feature maps
//   flash ADC              VINT -> Y after the last feature map
// The sequencer steps all of it (8 clocks per feature map, see ace_sequencer).
//
// Interface: `start` begins a group of N_MAPS feature maps; while the group
// runs, the source presents S/A/B of feature map `map_idx` and keeps them stable
// while `din_hold` is high. S_i = 1 marks a negative product A_i*B_i (the sign of
// the pair); A_i is 0..11, B_i is 0..4. The reference pulse VPUL comes from
// outside: it must rise when `sign_vtc` falls and last the width that stands
// for zero, VPUL_NS (the VTC pulse for VDD). `y` is valid in the cycle `y_valid`
// is high. `vint` is the integrator voltage, for observation.
//
// The block structure, the sizes (26 pairs, 11 x 4 = 44-bit streams, 6 feature
// maps) and the signal names follow the published design. The ADC range is set
// here so that mid-scale is a zero sum and full scale is
// +-N_MAPS*N_IN*LEN products; that mapping, the ADC width and the analog
// constants are this implementation's choices.
`timescale 1ns / 1fs
module sc_mac_engine #(
  parameter int unsigned N_IN          = sc_mac_pkg::N_IN,
  parameter int unsigned N_MAPS        = sc_mac_pkg::N_MAPS,
  parameter int unsigned ADC_BITS      = 8,
  parameter real         VDD           = 1.0,
  parameter real         VSAC_ZERO     = 0.41,
  parameter real         VTC_NS_PER_V  = 10.0,
  parameter real         INT_GAIN      = 4.0e-3,
  parameter real         VPUL_NS       = VTC_NS_PER_V * VDD,
  parameter int unsigned MW            = (N_MAPS > 1) ? $clog2(N_MAPS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [N_IN-1:0]         s,        // S_i: 1 = negative pair
  input  logic [N_IN-1:0][sc_mac_pkg::AW-1:0] a,        // |A_i|, feature-map value
  input  logic [N_IN-1:0][sc_mac_pkg::BW-1:0] b,        // |B_i|, weight
  input  logic                    vpul,     // reference pulse VPUL
  output logic                    sign_vtc, // VPUL must rise when this falls
  output logic [MW-1:0]           map_idx,
  output logic                    din_hold,
  output logic                    busy,
  output logic [3:0]              phase,    // sequencer phase (sc_mac_pkg::phase_e)
  output logic [ADC_BITS-1:0]     y,
  output logic                    y_valid,
  output real                     vint
);

  localparam int unsigned LEN_A = sc_mac_pkg::LEN_A;
  localparam int unsigned LEN_B = sc_mac_pkg::LEN_B;
  localparam int unsigned LEN   = sc_mac_pkg::LEN;
  localparam int unsigned AW    = sc_mac_pkg::AW;
  localparam int unsigned BW    = sc_mac_pkg::BW;
  localparam int unsigned NCAP  = N_IN * LEN;
  localparam real         NP    = real'(NCAP) * VSAC_ZERO / (VDD - VSAC_ZERO);
  // Integrator volts per product of the signed sum.
  localparam real         VSTEP = INT_GAIN * VTC_NS_PER_V * VDD / (real'(NCAP) + NP);
  localparam real         VMID  = real'(N_MAPS) * INT_GAIN * VPUL_NS;
  localparam real         VSPAN = real'(N_MAPS * NCAP) * VSTEP;

  // ---------------- decoders and AND gate array ----------------
  logic [N_IN-1:0][LEN_A-1:0] code_a;
  logic [N_IN-1:0][LEN_B-1:0] code_b;
  logic [N_IN-1:0][LEN-1:0]   din;
  logic [N_IN-1:0][LEN-1:0]   dsw;

  for (genvar i = 0; i < N_IN; i++) begin : g_dec
    sc_decoder #(.LEN(LEN_A), .W(AW)) u_dec_a (.mag(a[i]), .code(code_a[i]));
    sc_decoder #(.LEN(LEN_B), .W(BW)) u_dec_b (.mag(b[i]), .code(code_b[i]));
  end

  and_gate_array #(.N_IN(N_IN), .LEN_A(LEN_A), .LEN_B(LEN_B)) u_and (
    .code_a(code_a), .code_b(code_b), .din(din)
  );

  // ---------------- sequencer ----------------
  sc_mac_pkg::phase_e phase_q;
  assign phase = phase_q;
  logic   rst_sac, ion, pup, sign_sac, sigp_sac, sigp_vtc, intrst, adc_sample;

  ace_sequencer #(.N_MAPS(N_MAPS), .MW(MW)) u_seq (
    .clk, .rst_n, .start, .phase(phase_q), .map_idx, .din_hold,
    .rst_sac, .ion, .pup, .sign_sac, .sigp_sac, .sign_vtc, .sigp_vtc,
    .intrst, .adc_sample, .busy
  );

  // ---------------- analog accumulate engine ----------------
  sac_switch_logic #(.N_IN(N_IN), .LEN(LEN)) u_sw (
    .sin(s), .din(din), .sign(sign_sac), .sigp(sigp_sac), .pup(pup), .d(dsw)
  );

  real vsac;
  sac_cap_array #(.N_IN(N_IN), .LEN(LEN), .VDD(VDD), .VSAC_ZERO(VSAC_ZERO)) u_sac (
    .d(dsw), .rst(rst_sac), .ion(ion), .vsac(vsac)
  );

  logic vpuln, vpulp, vpp;
  vtc #(.NS_PER_V(VTC_NS_PER_V)) u_vtcn (.vin(vsac), .en(sign_vtc), .vpul(vpuln));
  vtc #(.NS_PER_V(VTC_NS_PER_V)) u_vtcp (.vin(vsac), .en(sigp_vtc), .vpul(vpulp));

  pulse_processor u_pp (.vpul(vpul), .vpuln(vpuln), .vpulp(vpulp), .vpp(vpp));

  int_circuit #(.GAIN_V_PER_NS(INT_GAIN)) u_int (.vpp(vpp), .intrst(intrst), .vout(vint));

  // ---------------- ADC ----------------
  flash_adc #(.BITS(ADC_BITS), .VLO(VMID - VSPAN), .VHI(VMID + VSPAN)) u_adc (
    .clk, .rst_n, .sample(adc_sample), .vin(vint), .y(y), .valid(y_valid)
  );

endmodule
