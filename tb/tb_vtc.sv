// Testbench of the VTC model. For input voltages across the published linear
// range 0.35 V .. 1.0 V it samples vin while en is high, drops en and measures
// the output pulse: it must start when en falls and last 10 ns/V * vin. It also
// checks that the output stays low while en is high and that a change of vin
// after en has fallen does not alter the pulse (the hold).
`timescale 1ns / 1fs
module tb_vtc;

  real  vin = 0.0;
  logic en = 1'b0;
  logic vpul;

  vtc dut (.vin, .en, .vpul);

  int checks = 0, failures = 0;
  realtime t_rise = 0.0, t_fall = 0.0;
  always @(posedge vpul) t_rise = $realtime;
  always @(negedge vpul) t_fall = $realtime;

  initial begin
    realtime t_en;
    #10;
    for (int k = 0; k <= 26; k++) begin
      real v;
      v = 0.35 + 0.025 * real'(k);
      vin = v - 0.2;
      en = 1'b1;
      #5 vin = v;
      #15;
      checks++;
      if (vpul !== 1'b0) begin failures++; $display("FAIL pulse while sampling"); end
      en = 1'b0;
      t_en = $realtime;
      #1 vin = 0.1;  // must not matter any more
      #30;
      checks++;
      if (t_rise != t_en || (t_fall - t_rise) - 10.0 * v > 1.0e-5 ||
          10.0 * v - (t_fall - t_rise) > 1.0e-5) begin
        failures++;
        $display("FAIL v=%f: rise %t (en fell %t) width %f expected %f",
                 v, t_rise, t_en, t_fall - t_rise, 10.0 * v);
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
