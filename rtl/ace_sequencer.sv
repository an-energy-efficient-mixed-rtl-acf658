// Phase sequencer of the analog accumulate engine (ACE).
//
// Runs one MAC operation per feature map as a NEG stage followed by a POS stage
// and accumulates N_MAPS operations in the integrator before the ADC samples.
// Each stage goes through four phases of one clock each:
//   RESET  - RST high and PUP high: both plates of every capacitor grounded;
//   CHARGE - PUP low and the stage enable (SIGN_SAC or SIGP_SAC) high, so only
//            the switches of the stage's sign follow the product bits; ION
//            (active low) ties the top plates to VDD in the clock-low half only;
//   SHARE  - PUP high: all bottom plates grounded, charge shared, VSAC valid;
//   SAMPLE - the stage's VTC enable (SIGN_VTC or SIGP_VTC) is high in the
//            clock-low half; when it falls, at the end of the phase, the VTC
//            starts its pulse, which runs into the next phase.
// INTRST is held through the CHARGE, SHARE and SAMPLE phases of the NEG stage
// of the first feature map of a group. The ADC samples VINT at the end of the
// cycle after the last POS stage, when the last VTCP pulse is over; that cycle
// is the first RESET phase of the next group if `start` is still high, so
// groups run back to back without a gap.
//
// Window timing: ION and the VTC enables are clock-low-half windows gated by
// the clock, so they open half a clock after the switches and the SAC settle
// and close at the clock edge, before the registered phase changes the
// switches or resets the SAC. With the published 25 MHz clock a phase is 40 ns,
// longer than the widest VTC pulse (about 10 ns).
//
// The RESET/CHARGE/SHARE order, NEG before POS, INTRST during the first NEG
// stage and the signal names follow the published sequence diagram. One clock
// per phase (8 per feature map), the clock-half windows and the start/busy
// handshake are this implementation's choices.
// `map_idx` names the feature map whose S/A/B data must be stable at the SAC
// inputs while `din_hold` is high.
`timescale 1ns / 1fs
module ace_sequencer #(
  parameter int unsigned N_MAPS = sc_mac_pkg::N_MAPS,
  parameter int unsigned MW     = (N_MAPS > 1) ? $clog2(N_MAPS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,      // begin a group of N_MAPS operations
  output sc_mac_pkg::phase_e phase,
  output logic [MW-1:0] map_idx,    // feature map in progress
  output logic          din_hold,   // S/A/B of map_idx must be stable
  output logic          rst_sac,    // RST of the SAC
  output logic          ion,        // ION of the SAC, active low
  output logic          pup,        // PUP of the SAC switch logic
  output logic          sign_sac,   // SIGN_SAC
  output logic          sigp_sac,   // SIGP_SAC
  output logic          sign_vtc,   // SIGN_VTC, enable of VTCN
  output logic          sigp_vtc,   // SIGP_VTC, enable of VTCP
  output logic          intrst,     // integrator reset
  output logic          adc_sample, // ADC samples VINT at the end of this cycle
  output logic          busy
);

  import sc_mac_pkg::*;

  phase_e nxt;
  logic   last_map;
  logic   adc_pend;  // the cycle after the last POS stage of a group

  assign last_map = (map_idx == MW'(N_MAPS - 1));

  always_comb begin
    nxt = phase;
    unique case (phase)
      PH_IDLE:     nxt = start ? PH_N_RESET : PH_IDLE;
      PH_N_RESET:  nxt = PH_N_CHARGE;
      PH_N_CHARGE: nxt = PH_N_SHARE;
      PH_N_SHARE:  nxt = PH_N_SAMPLE;
      PH_N_SAMPLE: nxt = PH_P_RESET;
      PH_P_RESET:  nxt = PH_P_CHARGE;
      PH_P_CHARGE: nxt = PH_P_SHARE;
      PH_P_SHARE:  nxt = PH_P_SAMPLE;
      PH_P_SAMPLE: nxt = (!last_map || start) ? PH_N_RESET : PH_IDLE;
      default:     nxt = PH_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase    <= PH_IDLE;
      map_idx  <= '0;
      adc_pend <= 1'b0;
    end else begin
      phase    <= nxt;
      adc_pend <= last_map && (phase == PH_P_SAMPLE);
      if (phase == PH_IDLE) map_idx <= '0;
      else if (phase == PH_P_SAMPLE) map_idx <= last_map ? '0 : map_idx + 1'b1;
    end
  end

  logic charge_ph;
  assign charge_ph = (phase == PH_N_CHARGE) || (phase == PH_P_CHARGE);

  always_comb begin
    rst_sac    = (phase == PH_IDLE) || (phase == PH_N_RESET) || (phase == PH_P_RESET);
    pup        = !charge_ph;
    ion        = !(charge_ph && !clk);
    sign_sac   = (phase == PH_N_CHARGE);
    sigp_sac   = (phase == PH_P_CHARGE);
    sign_vtc   = (phase == PH_N_SAMPLE) && !clk;
    sigp_vtc   = (phase == PH_P_SAMPLE) && !clk;
    intrst     = (map_idx == '0) && (phase inside {PH_N_CHARGE, PH_N_SHARE, PH_N_SAMPLE});
    din_hold   = (phase inside {PH_N_CHARGE, PH_N_SHARE, PH_P_CHARGE, PH_P_SHARE});
    adc_sample = adc_pend;
    busy       = (phase != PH_IDLE);
  end

  // The two stage enables never overlap, ION never meets RST, and a VTC only
  // samples while the SAC holds a shared voltage.
  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n) !(sign_sac && sigp_sac));
  a_ion_rst:   assert property (@(posedge clk) disable iff (!rst_n) !(!ion && rst_sac));
  a_vtc_hold:  assert property (@(posedge clk) disable iff (!rst_n)
                                (sign_vtc || sigp_vtc) |-> (pup && !rst_sac && ion));

endmodule
