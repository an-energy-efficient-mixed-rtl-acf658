// Testbench of the ACE phase sequencer with 6 feature maps. A reference model
// here counts clocks from `start`: clock k of a group belongs to feature map
// k / 8 and to step k % 8 (NEG RESET, CHARGE, SHARE, SAMPLE, POS RESET,
// CHARGE, SHARE, SAMPLE). In both halves of every clock it checks RST, ION
// (active low, only in the clock-low half of CHARGE), PUP, SIGN/SIGP of the SAC
// and of the VTCs (clock-low half of SAMPLE), INTRST (first map's NEG stage after
// RESET), map_idx, din_hold, busy and adc_sample (the clock after the last POS
// SAMPLE). Runs single groups, back-to-back groups and a return to idle.
`timescale 1ns / 1fs
module tb_ace_sequencer;
  import sc_mac_pkg::*;

  localparam int NM = 6;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  phase_e phase;
  logic [2:0] map_idx;
  logic din_hold, rst_sac, ion, pup, sign_sac, sigp_sac, sign_vtc, sigp_vtc;
  logic intrst, adc_sample, busy;

  ace_sequencer dut (.*);

  always #20 clk = ~clk;

  int checks = 0, failures = 0;

  // Reference: k = clock index within the running group, -1 when idle.
  int k = -1;
  bit adc_exp = 1'b0;

  task automatic expect_sig(string name, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %t k=%0d %s=%b expected %b", $realtime, k, name, got, exp);
    end
  endtask

  task automatic check_all(bit low_half);
    int  st, m;
    bit  act;
    act = (k >= 0);
    st  = act ? k % 8 : -1;
    m   = act ? k / 8 : 0;
    expect_sig("rst_sac", rst_sac, !act || st == 0 || st == 4);
    expect_sig("pup", pup, !(st == 1 || st == 5));
    expect_sig("ion", ion, !((st == 1 || st == 5) && low_half));
    expect_sig("sign_sac", sign_sac, st == 1);
    expect_sig("sigp_sac", sigp_sac, st == 5);
    expect_sig("sign_vtc", sign_vtc, st == 3 && low_half);
    expect_sig("sigp_vtc", sigp_vtc, st == 7 && low_half);
    expect_sig("intrst", intrst, act && m == 0 && st >= 1 && st <= 3);
    expect_sig("din_hold", din_hold, st == 1 || st == 2 || st == 5 || st == 6);
    expect_sig("busy", busy, act);
    expect_sig("adc_sample", adc_sample, adc_exp);
    checks++;
    if (int'(map_idx) != m) begin
      failures++;
      $display("FAIL %t map_idx=%0d expected %0d", $realtime, map_idx, m);
    end
  endtask

  int n_groups = 0;
  // Advance the reference at each rising edge, from the inputs seen there.
  always @(posedge clk) begin
    if (!rst_n) begin
      k = -1; adc_exp = 1'b0;
    end else begin
      adc_exp = (k == NM * 8 - 1);
      if (k == NM * 8 - 1) n_groups++;
      if (k < 0)                k = start ? 0 : -1;
      else if (k == NM * 8 - 1) k = start ? 0 : -1;
      else                      k = k + 1;
    end
  end

  always @(posedge clk) if (rst_n) begin #5 check_all(1'b0); end
  always @(negedge clk) if (rst_n) begin #5 check_all(1'b1); end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3) @(posedge clk);
    // One group.
    #1 start = 1'b1;
    @(posedge clk) #1 start = 1'b0;
    repeat (NM * 8 + 5) @(posedge clk);
    // Three groups back to back.
    #1 start = 1'b1;
    repeat (NM * 8 * 3 - 2) @(posedge clk);
    #1 start = 1'b0;
    repeat (NM * 8 + 5) @(posedge clk);
    checks++;
    if (n_groups != 4) begin
      failures++;
      $display("FAIL %0d groups completed, expected 4", n_groups);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
