// Testbench of the SAC switch logic at its default size (26 x 44 switches).
// Applies random signs and product bits under every combination of SIGN, SIGP
// and PUP and compares each switch with ((sin ? SIGN : SIGP) & din) | PUP,
// written here per bit as: PUP closes all; otherwise a negative pair follows
// its product bit only when SIGN is high, a positive pair only when SIGP is.
`timescale 1ns / 1fs
module tb_sac_switch_logic;
  import sc_mac_pkg::*;

  logic [N_IN-1:0]          sin;
  logic [N_IN-1:0][LEN-1:0] din, d;
  logic                     sign, sigp, pup;

  sac_switch_logic dut (.sin, .din, .sign, .sigp, .pup, .d);

  int checks = 0, failures = 0;

  initial begin
    repeat (40) begin
      sin = N_IN'($urandom);
      for (int i = 0; i < N_IN; i++) din[i] = {12'($urandom), 32'($urandom)};
      for (int c = 0; c < 8; c++) begin
        {sign, sigp, pup} = 3'(c);
        #1;
        for (int i = 0; i < N_IN; i++) begin
          for (int j = 0; j < LEN; j++) begin
            logic e;
            if (pup)          e = 1'b1;
            else if (sin[i])  e = sign && din[i][j];
            else              e = sigp && din[i][j];
            checks++;
            if (d[i][j] !== e) begin
              failures++;
              if (failures < 10)
                $display("FAIL i=%0d j=%0d sin=%b sign=%b sigp=%b pup=%b din=%b d=%b",
                         i, j, sin[i], sign, sigp, pup, din[i][j], d[i][j]);
            end
          end
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
