// Self-checking testbench for the low-pass filter model.
//
// Instance A uses the default coefficient (SHIFT = 11, time constant 2048
// samples, about 78 kHz cutoff at 1 GHz). It gets a positive then a negative
// step; the output is compared every sample with the exact real-valued
// first-order response X * (1 - (1 - 2^-SHIFT)^n), with a tolerance of
// 3 LSB for the fixed-point rounding. Instance B (SHIFT = 4) gets random
// samples and is compared with a real-valued recursion of the same pole.
`timescale 1ns/1ps
module tb_lpf;

  localparam int W = 13;

  logic clk = 1'b0;
  logic rst;
  logic signed [W-1:0] xa, ya, xb, yb;

  int checks = 0;
  int failures = 0;

  lpf #(.W(W))              dut_a (.clk(clk), .rst(rst), .x(xa), .y(ya));
  lpf #(.W(W), .SHIFT(4))   dut_b (.clk(clk), .rst(rst), .x(xb), .y(yb));

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_close(string what, int got, real want, real tol);
    checks++;
    if ((real'(got) - want) > tol || (want - real'(got)) > tol) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %f", what, got, want);
    end
  endtask

  initial begin
    real a_pole, b_pole, start, target, yref_b, decay;
    int  step_errs;
    a_pole = 1.0 - 1.0 / 2048.0;
    b_pole = 1.0 - 1.0 / 16.0;
    rst = 1'b1;
    xa = '0;
    xb = '0;
    repeat (2) @(posedge clk);
    #0.1 rst = 1'b0;
    checks++;
    if (ya != 0 || yb != 0) begin
      failures++;
      $display("outputs not cleared by reset");
    end
    // Steps on A: 0 -> +3000 for 12000 samples, then -> -4000.
    start = 0.0;
    target = 3000.0;
    for (int seg = 0; seg < 2; seg++) begin
      decay = 1.0;
      xa = W'($rtoi(target));
      for (int n = 1; n <= 12000; n++) begin
        @(posedge clk);
        #0.1;
        decay = decay * a_pole;
        expect_close("step", int'(ya), target + (start - target) * decay, 3.0);
      end
      start = target + (start - target) * decay;
      target = -4000.0;
    end
    // Random input on B.
    yref_b = 0.0;
    rst = 1'b1;
    @(posedge clk);
    #0.1 rst = 1'b0;
    for (int n = 0; n < 5000; n++) begin
      xb = W'(int'($urandom_range(4000)) - 2000);
      @(posedge clk);
      #0.1;
      yref_b = b_pole * yref_b + (1.0 - b_pole) * real'(int'(xb));
      expect_close("random", int'(yb), yref_b, 3.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
