// Testbench of the flash ADC model (8 bits, range 0 .. 1 V). Sweeps the input
// over and beyond the range and checks the registered code against
// round((vin - VLO) / LSB), saturated to 0 .. 255, one clock after `sample`;
// also checks that `valid` follows `sample` by one clock and that the code
// holds when `sample` is low.
`timescale 1ns / 1fs
module tb_flash_adc;

  logic clk = 1'b0, rst_n = 1'b0, sample = 1'b0;
  real  vin = 0.0;
  logic [7:0] y;
  logic valid;

  flash_adc dut (.clk, .rst_n, .sample, .vin, .y, .valid);

  always #20 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int k = -20; k < 1100; k += 3) begin
      int  e;
      real x;
      vin = real'(k) / 1024.0 + 0.0003;
      x = vin * 256.0;
      e = int'($floor(x + 0.5));
      if (e < 0) e = 0;
      if (e > 255) e = 255;
      sample = 1'b1;
      @(posedge clk) #1 sample = 1'b0;
      checks++;
      if (!valid || int'(y) != e) begin
        failures++;
        $display("FAIL vin=%f y=%0d valid=%b expected %0d", vin, y, valid, e);
      end
      vin = 0.5;
      @(posedge clk) #1;
      checks++;
      if (valid || int'(y) != e) begin
        failures++;
        $display("FAIL hold: y=%0d valid=%b", y, valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
