// Transfer-characteristic sweep of the MAC engine: one feature map per
// operation, all pairs positive, input number n (= sum of |A_i|*|B_i|, the
// count of charged capacitors) swept from 0 to 1144 in steps of 44. For each n
// it checks the VSAC after the POS stage's SHARE phase, (n + NP) / (1144 + NP)
// volts, and the integrator voltage 4 mV/ns * (10 ns + 10 ns/V * (VSAC - 0.41 V)),
// and the maximum deviation of VINT from the straight line through its two end
// points, which must stay below 1 uV (the model is linear by construction; the
// real circuit shows up to 0.2 mV). The same sweep with negative pairs checks
// the falling branch.
`timescale 1ns / 1fs
module tb_mac_transfer;
  import sc_mac_pkg::*;

  localparam int  NCAP = N_IN * LEN;
  localparam real NP   = real'(NCAP) * 0.41 / 0.59;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, vpul = 1'b0;
  logic [N_IN-1:0]         s;
  logic [N_IN-1:0][AW-1:0] a;
  logic [N_IN-1:0][BW-1:0] b;
  logic       sign_vtc, din_hold, busy, y_valid;
  logic [0:0] map_idx;
  logic [7:0] y;
  logic [3:0] phase;
  real        vint;

  sc_mac_engine #(.N_MAPS(1)) dut (.*);

  always #20 clk = ~clk;
  always @(negedge sign_vtc) begin
    vpul = 1'b1;
    #(10.0) vpul = 1'b0;
  end

  int checks = 0, failures = 0;
  real vsac_pos, vint_s;
  always @(posedge clk) if (phase == 4'(PH_P_SAMPLE)) vsac_pos <= dut.vsac;
  always @(posedge clk) if (dut.u_seq.adc_sample) vint_s <= vint;

  real vline [2][27];

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int neg = 0; neg < 2; neg++) begin
      for (int p = 0; p <= 26; p++) begin
        int  n;
        real vs_exp, vi_exp;
        n = 44 * p;
        for (int i = 0; i < N_IN; i++) begin
          s[i] = 1'(neg);
          a[i] = (i < p) ? AW'(11) : '0;
          b[i] = (i < p) ? BW'(4)  : '0;
        end
        @(posedge clk) #1 start = 1'b1;
        @(posedge clk) #1 start = 1'b0;
        do @(posedge clk); while (!y_valid);
        #1;
        vs_exp = (real'(neg ? 0 : n) + NP) / (real'(NCAP) + NP);
        vi_exp = 4.0e-3 * (10.0 + (neg ? -1.0 : 1.0) * 10.0 * (real'(n) / (real'(NCAP) + NP)));
        checks++;
        if (vsac_pos - vs_exp > 1e-9 || vs_exp - vsac_pos > 1e-9) begin
          failures++;
          $display("FAIL n=%0d vsac=%f expected %f", n, vsac_pos, vs_exp);
        end
        checks++;
        if (vint_s - vi_exp > 1e-7 || vi_exp - vint_s > 1e-7) begin
          failures++;
          $display("FAIL n=%0d neg=%0d vint=%f expected %f", n, neg, vint_s, vi_exp);
        end
        vline[neg][p] = vint_s;
      end
      for (int p = 0; p <= 26; p++) begin
        real lin;
        lin = vline[neg][0] + (vline[neg][26] - vline[neg][0]) * real'(p) / 26.0;
        checks++;
        if (vline[neg][p] - lin > 1e-6 || lin - vline[neg][p] > 1e-6) begin
          failures++;
          $display("FAIL nonlinearity at n=%0d: %e V", 44 * p, vline[neg][p] - lin);
        end
      end
      $display("sweep %s: VINT %f mV at n=0 .. %f mV at n=1144", neg ? "negative" : "positive",
               vline[neg][0] * 1e3, vline[neg][26] * 1e3);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
