// Testbench of the AND gate array at its default size (26 pairs, 11-bit and
// 4-bit codes, 44-bit products). Checks the deterministic-code property: for
// every pair of thermometer codes the product holds exactly |A|*|B| ones; and
// for random (non-thermometer) codes each product bit equals
// a[j mod 11] & b[j mod 4], so every bit of one stream meets every bit of the
// other once. Combinational: outputs are checked 1 ns after each change.
`timescale 1ns / 1fs
module tb_and_gate_array;
  import sc_mac_pkg::*;

  logic [N_IN-1:0][LEN_A-1:0] code_a;
  logic [N_IN-1:0][LEN_B-1:0] code_b;
  logic [N_IN-1:0][LEN-1:0]   din;

  and_gate_array dut (.code_a(code_a), .code_b(code_b), .din(din));

  int checks = 0, failures = 0;

  function automatic logic [LEN_A-1:0] therm_a(int n);
    logic [LEN_A-1:0] c = '0;
    for (int k = 0; k < n; k++) c[k] = 1'b1;
    return c;
  endfunction
  function automatic logic [LEN_B-1:0] therm_b(int n);
    logic [LEN_B-1:0] c = '0;
    for (int k = 0; k < n; k++) c[k] = 1'b1;
    return c;
  endfunction

  initial begin
    // All 12 x 5 magnitude combinations, spread over the 26 pairs.
    for (int va = 0; va <= LEN_A; va++) begin
      for (int i = 0; i < N_IN; i++) begin
        int vb = (i + va) % (LEN_B + 1);
        code_a[i] = therm_a(va);
        code_b[i] = therm_b(vb);
      end
      #1;
      for (int i = 0; i < N_IN; i++) begin
        int vb = (i + va) % (LEN_B + 1);
        checks++;
        if ($countones(din[i]) != va * vb) begin
          failures++;
          $display("FAIL pair %0d: |A|=%0d |B|=%0d ones=%0d", i, va, vb, $countones(din[i]));
        end
      end
    end
    // Random codes: bit-exact check of the repetition pattern.
    repeat (50) begin
      for (int i = 0; i < N_IN; i++) begin
        code_a[i] = LEN_A'($urandom);
        code_b[i] = LEN_B'($urandom);
      end
      #1;
      for (int i = 0; i < N_IN; i++) begin
        logic [LEN-1:0] e;
        for (int j = 0; j < LEN; j++) e[j] = code_a[i][j % LEN_A] & code_b[i][j % LEN_B];
        checks++;
        if (din[i] !== e) begin
          failures++;
          $display("FAIL pair %0d: din=%h expected %h", i, din[i], e);
        end
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
