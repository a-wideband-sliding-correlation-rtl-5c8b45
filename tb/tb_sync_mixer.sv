// Self-checking testbench for the Mode Control switch and Sync mixer.
// Exhaustively drives mode and both chips and compares the PN output and
// the bipolar product with values worked out from the truth table.
`timescale 1ns/1ps
module tb_sync_mixer;
  import chsnd_pkg::*;

  mode_e             mode;
  logic              pn_fast;
  logic              pn_slow;
  logic              pn_out;
  logic signed [1:0] sync_prod;

  int checks = 0;
  int failures = 0;

  sync_mixer dut (.mode(mode), .pn_fast(pn_fast), .pn_slow(pn_slow),
                  .pn_out(pn_out), .sync_prod(sync_prod));

  initial begin : watchdog
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < 2; a++)
        for (int b = 0; b < 2; b++) begin
          int exp_sync;
          int exp_pn;
          mode    = mode_e'(m[0]);
          pn_fast = a[0];
          pn_slow = b[0];
          #1;
          // TX (1): PN out follows PNSG1, Sync idle.
          // RX (0): PN out idle, Sync = (2a-1)*(2b-1).
          exp_pn   = (m == 1) ? a : 0;
          exp_sync = (m == 1) ? 0 : (2*a - 1) * (2*b - 1);
          checks++;
          if (int'(pn_out) != exp_pn) begin
            failures++;
            $display("mode=%0d a=%0d b=%0d: pn_out=%0d expected %0d", m, a, b, pn_out, exp_pn);
          end
          checks++;
          if (int'(sync_prod) != exp_sync) begin
            failures++;
            $display("mode=%0d a=%0d b=%0d: sync=%0d expected %0d", m, a, b, sync_prod, exp_sync);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
