// Self-checking testbench for the I/Q correlator mixer model.
// Drives the extreme samples and 2000 random samples with both replica
// chip values and checks y = x for chip 1 and y = -x for chip 0, computed
// in integer arithmetic (including -(-2048) = +2048, which needs the extra
// output bit).
`timescale 1ns/1ps
module tb_iq_mixer;
  import chsnd_pkg::*;

  localparam int W = SAMPLE_W;

  logic signed [W-1:0] x;
  logic                ref_chip;
  logic signed [W:0]   y;

  int checks = 0;
  int failures = 0;

  iq_mixer #(.W(W)) dut (.x(x), .ref_chip(ref_chip), .y(y));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(int xv, bit c);
    int expv;
    x        = W'(xv);
    ref_chip = c;
    #1;
    expv = c ? xv : -xv;
    checks++;
    if (int'(y) != expv) begin
      failures++;
      $display("x=%0d chip=%0d: y=%0d expected %0d", xv, c, y, expv);
    end
  endtask

  initial begin
    int lo = -(1 << (W-1));
    int hi = (1 << (W-1)) - 1;
    for (int c = 0; c < 2; c++) begin
      check_one(lo, c[0]);
      check_one(hi, c[0]);
      check_one(0, c[0]);
      check_one(-1, c[0]);
    end
    for (int i = 0; i < 2000; i++)
      check_one(int'($urandom_range(hi - lo)) + lo, 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
