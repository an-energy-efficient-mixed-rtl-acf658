// Testbench of the pulse processing circuit. Part 1 applies the eight input
// combinations and compares with (VPUL xor VPULN) or VPULP. Part 2 drives
// pulse trains as the engine does: VPUL and VPULN rise together, VPULN being
// no longer than VPUL, and VPULP later; it measures the total high time of VPP
// and checks it equals width(VPUL) - width(VPULN) + width(VPULP).
`timescale 1ns / 1fs
module tb_pulse_processor;

  logic vpul = 1'b0, vpuln = 1'b0, vpulp = 1'b0, vpp;

  pulse_processor dut (.vpul, .vpuln, .vpulp, .vpp);

  int checks = 0, failures = 0;

  realtime t_hi = 0.0, t_rise = 0.0;
  always @(posedge vpp) t_rise = $realtime;
  always @(negedge vpp) t_hi = t_hi + ($realtime - t_rise);

  initial begin
    for (int c = 0; c < 8; c++) begin
      {vpul, vpuln, vpulp} = 3'(c);
      #1;
      checks++;
      if (vpp !== ((vpul ^ vpuln) | vpulp)) begin
        failures++;
        $display("FAIL pul=%b puln=%b pulp=%b vpp=%b", vpul, vpuln, vpulp, vpp);
      end
    end
    {vpul, vpuln, vpulp} = 3'b000;
    #10;
    repeat (20) begin
      real wpul, wn, wp, expw;
      wpul = 10.0;
      wn   = 4.1 + 5.9 * real'($urandom_range(1000)) / 1000.0;
      wp   = 4.1 + 5.9 * real'($urandom_range(1000)) / 1000.0;
      t_hi = 0.0;
      fork
        begin vpul = 1'b1; #(wpul) vpul = 1'b0; end
        begin vpuln = 1'b1; #(wn) vpuln = 1'b0; end
      join
      #10;
      vpulp = 1'b1; #(wp) vpulp = 1'b0;
      #10;
      expw = wpul - wn + wp;
      checks++;
      if (t_hi - expw > 1.0e-5 || expw - t_hi > 1.0e-5) begin
        failures++;
        $display("FAIL width %f expected %f", t_hi, expw);
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
