// Self-checking testbench for the programmable PN sequence generator.
//
// For every length N = 5..12 it programs a known primitive tap set (from
// published maximal-length LFSR tap tables; for N = 12 the evaluation
// board's SW = 000000101001, taps [12,6,4,1]) and records 2*(2^N-1) chips.
// It checks, against a reference LFSR written here as a bit queue:
//   - every chip, one chip per clock (the 1 chip/cycle rate);
//   - the period is exactly 2^N - 1 (no shorter repeat);
//   - the m-sequence balance: 2^(N-1) ones per period;
//   - the two-valued periodic autocorrelation (2^N-1 at shift 0, -1 else);
//   - SW bits at or above N do not change the sequence.
`timescale 1ns/1ps
module tb_pnsg;
  import chsnd_pkg::*;

  logic        clk = 1'b0;
  logic        rst;
  logic [2:0]  s_len;
  logic [12:1] sw;
  logic        chip;

  int checks = 0;
  int failures = 0;

  pnsg dut (.clk(clk), .rst(rst), .s_len(s_len), .sw(sw), .chip(chip));

  always #0.5 clk = ~clk;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Taps other than N itself, per N (bit k set = stage k feeds back).
  function automatic logic [12:1] taps_for(int n);
    case (n)
      5:  return 12'b0000_0000_0100;          // [5,3]
      6:  return 12'b0000_0001_0000;          // [6,5]
      7:  return 12'b0000_0010_0000;          // [7,6]
      8:  return 12'b0000_0011_1000;          // [8,6,5,4]
      9:  return 12'b0000_0001_0000;          // [9,5]
      10: return 12'b0000_0100_0000;          // [10,7]
      11: return 12'b0001_0000_0000;          // [11,9]
      default: return 12'b0000_0010_1001;     // [12,6,4,1]
    endcase
  endfunction

  task automatic run_len(int n, logic [12:1] taps, logic [12:1] junk);
    int   len = (1 << n) - 1;
    bit   ref_reg[1:12];
    bit   seq[];
    int   ones;
    bit   fb;
    int   bad;
    int   per;
    seq = new[2*len];
    s_len = 3'(n - 5);
    sw    = taps | junk;
    rst   = 1'b1;
    @(posedge clk);
    #0.1 rst = 1'b0;
    for (int k = 1; k <= 12; k++) ref_reg[k] = 1'b1;
    bad = 0;
    for (int i = 0; i < 2*len; i++) begin
      seq[i] = chip;
      if (chip !== ref_reg[n]) bad++;
      fb = ref_reg[n];
      for (int k = 1; k < n; k++) if (taps[k]) fb ^= ref_reg[k];
      for (int k = 12; k > 1; k--) ref_reg[k] = ref_reg[k-1];
      ref_reg[1] = fb;
      @(posedge clk);
      #0.1;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("N=%0d: %0d chips differ from reference", n, bad);
    end
    // Period: smallest p with seq[i] == seq[i+p] for all i < len.
    per = 0;
    for (int p = 1; p <= len && per == 0; p++) begin
      bit ok = 1;
      for (int i = 0; i < len && ok; i++) if (seq[i] != seq[i+p]) ok = 0;
      if (ok) per = p;
    end
    checks++;
    if (per != len) begin
      failures++;
      $display("N=%0d: period %0d, expected %0d", n, per, len);
    end
    // Periodic autocorrelation of the bipolar sequence: len at shift 0 and
    // -1 at every other shift (the m-sequence property behind the Sync peak
    // and one-chip delay resolution).
    bad = 0;
    for (int sh = 1; sh < len; sh++) begin
      int acc = 0;
      for (int i = 0; i < len; i++) acc += (seq[i] == seq[i+sh]) ? 1 : -1;
      if (acc != -1) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("N=%0d: %0d shifts with autocorrelation other than -1", n, bad);
    end
    ones = 0;
    for (int i = 0; i < len; i++) ones += int'(seq[i]);
    checks++;
    if (ones != (1 << (n-1))) begin
      failures++;
      $display("N=%0d: %0d ones per period, expected %0d", n, ones, 1 << (n-1));
    end
  endtask

  initial begin
    rst = 1'b1;
    s_len = '0;
    sw = '0;
    for (int n = 5; n <= 12; n++) run_len(n, taps_for(n), '0);
    // Unused switch bits above N must be ignored.
    run_len(5, taps_for(5), 12'b1010_1010_0000);
    run_len(11, taps_for(11), 12'b1100_0000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
