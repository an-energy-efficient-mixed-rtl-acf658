// Testbench of the binary-to-stochastic decoder at both sizes used in the
// engine (Decoder-A, LEN = 11, and Decoder-B, LEN = 4). Every input value is
// applied; the code must hold exactly min(mag, LEN) ones, packed at the low end
// (bit k set exactly when k < mag). Combinational: outputs are checked 1 ns
// after each input change.
`timescale 1ns / 1fs
module tb_sc_decoder;

  logic [3:0]  mag_a;
  logic [10:0] code_a;
  logic [2:0]  mag_b;
  logic [3:0]  code_b;

  sc_decoder #(.LEN(11)) dut_a (.mag(mag_a), .code(code_a));
  sc_decoder #(.LEN(4))  dut_b (.mag(mag_b), .code(code_b));

  int checks = 0, failures = 0;

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic [10:0] expa;
      mag_a = 4'(v);
      #1;
      expa = '0;
      for (int k = 0; k < 11; k++) expa[k] = (k < v);
      checks++;
      if (code_a !== expa || $countones(code_a) != ((v > 11) ? 11 : v)) begin
        failures++;
        $display("FAIL A mag=%0d code=%b expected %b", v, code_a, expa);
      end
    end
    for (int v = 0; v < 8; v++) begin
      logic [3:0] expb;
      mag_b = 3'(v);
      #1;
      expb = '0;
      for (int k = 0; k < 4; k++) expb[k] = (k < v);
      checks++;
      if (code_b !== expb) begin
        failures++;
        $display("FAIL B mag=%0d code=%b expected %b", v, code_b, expb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
