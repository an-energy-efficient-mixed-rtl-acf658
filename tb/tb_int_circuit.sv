// Testbench of the integrating-circuit model. Applies trains of pulses of
// random width and checks that the output grows by 4 mV per ns of pulse, holds
// between pulses, accumulates over a train of six pulses (one per feature map),
// returns to 0 on INTRST and ignores pulses while INTRST is high.
`timescale 1ns / 1fs
module tb_int_circuit;

  logic vpp = 1'b0, intrst = 1'b0;
  real  vout;

  int_circuit dut (.vpp, .intrst, .vout);

  int checks = 0, failures = 0;

  task automatic check_v(real exp, string what);
    checks++;
    if (vout - exp > 1.0e-9 || exp - vout > 1.0e-9) begin
      failures++;
      $display("FAIL %s: vout=%f expected %f", what, vout, exp);
    end
  endtask

  initial begin
    real acc;
    intrst = 1'b1; #10 intrst = 1'b0; #10;
    check_v(0.0, "after reset");
    repeat (10) begin
      acc = 0.0;
      intrst = 1'b1; #5;
      vpp = 1'b1; #7 vpp = 1'b0; #5;  // ignored while in reset
      check_v(0.0, "pulse during reset");
      intrst = 1'b0; #5;
      for (int m = 0; m < 6; m++) begin
        real w;
        w = 4.0 + 12.0 * real'($urandom_range(1000)) / 1000.0;
        vpp = 1'b1; #(w) vpp = 1'b0;
        acc += 4.0e-3 * w;
        #20;
        check_v(acc, "accumulate");
      end
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
