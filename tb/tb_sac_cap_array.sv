// Testbench of the SAC capacitor-array model at its default size (26 x 44 unit
// capacitors, VDD = 1.0 V, 0.41 V at zero count). It runs RESET -> CHARGE ->
// SHARE with random sets of closed switches and checks, after SHARE:
//   VSAC = VDD * (n + NP) / (NCAP + NP), NP = NCAP * 0.41 / 0.59,
// with n the number of switches closed during CHARGE. It also checks VSAC = 0
// during RESET, VDD while ION is active, and the published end points
// 0.41 V (n = 0) and 1.0 V (n = NCAP).
`timescale 1ns / 1fs
module tb_sac_cap_array;
  import sc_mac_pkg::*;

  localparam int  NCAP = N_IN * LEN;
  localparam real NP   = real'(NCAP) * 0.41 / 0.59;

  logic [N_IN-1:0][LEN-1:0] d;
  logic rst, ion;
  real  vsac;

  sac_cap_array dut (.d, .rst, .ion, .vsac);

  int checks = 0, failures = 0;

  task automatic check_v(real got, real exp, string what);
    checks++;
    if (got - exp > 1.0e-9 || exp - got > 1.0e-9) begin
      failures++;
      $display("FAIL %s: vsac=%f expected %f", what, got, exp);
    end
  endtask

  task automatic cycle(input logic [N_IN-1:0][LEN-1:0] sel);
    int n;
    n = 0;
    for (int i = 0; i < N_IN; i++) n += $countones(sel[i]);
    d = '1; rst = 1'b1; ion = 1'b1; #10;
    check_v(vsac, 0.0, "reset");
    rst = 1'b0; #5; d = sel; #5;
    ion = 1'b0; #10;
    check_v(vsac, 1.0, "charge");
    ion = 1'b1; #5;
    d = '1; #5;
    check_v(vsac, (real'(n) + NP) / (real'(NCAP) + NP), "share");
  endtask

  initial begin
    logic [N_IN-1:0][LEN-1:0] sel;
    rst = 1'b1; ion = 1'b1; d = '1; #5;
    cycle('0);
    check_v(vsac, 0.41, "zero end point");
    cycle('1);
    check_v(vsac, 1.0, "full end point");
    repeat (40) begin
      int p;
      p = int'($urandom_range(100));
      for (int i = 0; i < N_IN; i++)
        for (int j = 0; j < LEN; j++)
          sel[i][j] = ($urandom_range(99) < p);
      cycle(sel);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
