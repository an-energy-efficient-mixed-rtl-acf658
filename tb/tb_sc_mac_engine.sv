// End-to-end testbench of the mixed-signal SC MAC engine at its default size
// (26 input pairs, 44-bit streams, 6 feature maps, 25 MHz clock).
//
// For every group of 6 feature maps it draws signed pairs, presents the pairs of
// the map named by map_idx, supplies the reference pulse VPUL (10 ns, starting
// when sign_vtc falls) and checks:
//   * the integrator voltage after the group against VMID + sum * VSTEP, where
//     sum = sum over maps and pairs of (+/-)|A|*|B| is computed here in integers
//     and VMID, VSTEP come from the analog constants;
//   * the ADC code against the rounded, saturated ideal code;
//   * the latency: 49 clocks (6 maps x 8 phases, then the ADC cycle) from the
//     first busy cycle to y_valid, and 48 clocks between back-to-back groups.
// It counts the mechanisms of the design: NEG-stage and POS-stage pulses, the
// reference-pulse subtraction, integrator resets, accumulation over several
// maps, back-to-back groups and ADC saturation, and fails if one never occurs.
`timescale 1ns / 1fs
module tb_sc_mac_engine;
  import sc_mac_pkg::*;

  localparam int NI = N_IN;
  localparam int NM = N_MAPS;
  localparam int NCAP = NI * LEN;
  localparam real NP    = real'(NCAP) * 0.41 / 0.59;
  localparam real VSTEP = 4.0e-3 * 10.0 / (real'(NCAP) + NP);
  localparam real VMID  = real'(NM) * 4.0e-3 * 10.0;
  localparam int  NGROUPS = 30;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, vpul = 1'b0;
  logic [NI-1:0]         s;
  logic [NI-1:0][AW-1:0] a;
  logic [NI-1:0][BW-1:0] b;
  logic       sign_vtc, din_hold, busy, y_valid;
  logic [2:0] map_idx;
  logic [7:0] y;
  logic [3:0] phase;
  real        vint;

  sc_mac_engine dut (.*);

  always #20 clk = ~clk;

  // Integrator voltage at the moment the ADC samples it.
  real vint_s;
  always @(posedge clk) if (dut.u_seq.adc_sample) vint_s <= vint;

  // Reference pulse: width that stands for a zero result (VTC pulse at VDD).
  always @(negedge sign_vtc) begin
    vpul = 1'b1;
    #(10.0) vpul = 1'b0;
  end

  // Data of every group, one entry per group and feature map. The source
  // presents the data of group `grp`, map `map_idx`; `grp` advances at the clock
  // edge that ends the last POS stage of a group.
  logic [NI-1:0]         gs [NGROUPS][NM];
  logic [NI-1:0][AW-1:0] ga [NGROUPS][NM];
  logic [NI-1:0][BW-1:0] gb [NGROUPS][NM];
  int exp_sum [NGROUPS];
  int grp = 0;
  always @(posedge clk)
    if (dut.u_seq.phase == PH_P_SAMPLE && int'(map_idx) == NM - 1 && grp < NGROUPS - 1)
      grp <= grp + 1;
  assign s = gs[grp][map_idx];
  assign a = ga[grp][map_idx];
  assign b = gb[grp][map_idx];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int n_negp = 0, n_posp = 0, n_sub = 0, n_intrst = 0, n_accum = 0, n_b2b = 0, n_sat = 0;
  always @(posedge dut.vpuln) n_negp++;
  always @(posedge dut.vpulp) n_posp++;
  always @(posedge dut.u_seq.intrst) n_intrst++;
  // Subtraction visible: VPULN ends while VPUL is still high.
  always @(negedge dut.vpuln) if (vpul) n_sub++;

  // Fill group g with data of the given kind and return its exact sum.
  function automatic int fill_group(int g, int kind);
    int sum = 0;
    int maps_used = 0;
    for (int m = 0; m < NM; m++) begin
      int msum = 0;
      for (int i = 0; i < NI; i++) begin
        int av, bv;
        logic sv;
        case (kind)
          0: begin sv = 1'b0; av = 0;  bv = 0; end
          1: begin sv = 1'b0; av = 11; bv = 4; end
          2: begin sv = 1'b1; av = 11; bv = 4; end
          3: begin sv = 1'($urandom_range(1)); av = 11 + int'($urandom_range(4)); bv = 4 + int'($urandom_range(3)); end
          default: begin
            sv = 1'($urandom_range(1));
            av = int'($urandom_range(11));
            bv = int'($urandom_range(4));
          end
        endcase
        gs[g][m][i] = sv;
        ga[g][m][i] = AW'(av);
        gb[g][m][i] = BW'(bv);
        if (av > 11) av = 11;  // decoders saturate
        if (bv > 4)  bv = 4;
        msum += (sv ? -1 : 1) * av * bv;
      end
      if (msum != 0) maps_used++;
      sum += msum;
    end
    if (maps_used > 1) n_accum++;
    return sum;
  endfunction

  function automatic int ideal_code(int sum);
    real x;
    int  c;
    x = real'(sum + NM * NCAP) * 256.0 / real'(2 * NM * NCAP);
    c = int'($floor(x + 0.5));
    if (c < 0) c = 0;
    if (c > 255) c = 255;
    return c;
  endfunction

  int t_valid_prev;

  task automatic check_result(int sum);
    real vexp, err;
    int  c;
    vexp = VMID + real'(sum) * VSTEP;
    err  = vint_s - vexp;
    checks++;
    if (err > 0.05 * VSTEP || err < -0.05 * VSTEP) begin
      failures++;
      $display("FAIL vint: sum=%0d vint=%f expected %f", sum, vint_s, vexp);
    end
    c = ideal_code(sum);
    checks++;
    if (int'(y) != c) begin
      failures++;
      $display("FAIL y: sum=%0d y=%0d expected %0d", sum, y, c);
    end
    if (c == 0 || c == 255) n_sat++;
  endtask

  initial begin
    int t_start;
    for (int g = 0; g < NGROUPS; g++) begin
      for (int m = 0; m < NM; m++) begin gs[g][m] = '0; ga[g][m] = '0; gb[g][m] = '0; end
      exp_sum[g] = fill_group(g, (g < 4) ? g : 4);
    end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    // Groups 0..19 one at a time, started by a one-cycle start pulse.
    for (int g = 0; g < 20; g++) begin
      repeat (2) @(posedge clk);
      #1 start = 1'b1;
      @(posedge clk) #1 start = 1'b0;
      t_start = cyc;  // first busy cycle
      do @(posedge clk); while (!y_valid);
      #1;
      // y is registered 6*8+1 edges after the start edge, and y_valid is seen
      // at the edge that ends its cycle.
      checks++;
      if (cyc - t_start != NM * 8 + 2) begin
        failures++;
        $display("FAIL latency %0d cycles, expected %0d", cyc - t_start, NM * 8 + 2);
      end
      check_result(exp_sum[g]);
    end
    // Groups 20..29 back to back: start held high.
    @(posedge clk) #1 start = 1'b1;
    for (int g = 20; g < NGROUPS; g++) begin
      do @(posedge clk); while (!y_valid);
      #1;
      if (g > 20) begin
        checks++;
        if (cyc - t_valid_prev != NM * 8) begin
          failures++;
          $display("FAIL back-to-back spacing %0d", cyc - t_valid_prev);
        end
        n_b2b++;
      end
      t_valid_prev = cyc;
      if (grp == NGROUPS - 1) start = 1'b0;
      check_result(exp_sum[g]);
    end
    repeat (NM * 8 + 4) @(posedge clk);

    $display("mechanisms: neg_pulses=%0d pos_pulses=%0d subtract=%0d intrst=%0d accum=%0d b2b=%0d adc_sat=%0d",
             n_negp, n_posp, n_sub, n_intrst, n_accum, n_b2b, n_sat);
    checks++; if (n_negp == 0)  begin failures++; $display("FAIL no NEG pulse"); end
    checks++; if (n_posp == 0)  begin failures++; $display("FAIL no POS pulse"); end
    checks++; if (n_sub == 0)   begin failures++; $display("FAIL no subtraction"); end
    checks++; if (n_intrst == 0) begin failures++; $display("FAIL no INT reset"); end
    checks++; if (n_accum == 0) begin failures++; $display("FAIL no accumulation"); end
    checks++; if (n_b2b == 0)   begin failures++; $display("FAIL no back-to-back"); end
    checks++; if (n_sat == 0)   begin failures++; $display("FAIL no ADC saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NGROUPS * NM * 8 * 2 + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
