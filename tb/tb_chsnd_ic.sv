// Self-checking testbench for the channel sounder IC.
//
// The fast and slow clocks run at periods 1.8 ns and 2.0 ns (a slide
// factor of 10). Reference LFSRs, written here as integer state machines,
// advance on the same clock edges as the two PNSGs. On every fast and slow
// clock falling edge the testbench checks:
//   - TX mode: pn_out equals the fast reference chip and the Sync product
//     is 0;
//   - RX mode: pn_out is 0 and the Sync product is +1 when the fast and slow
//     reference chips agree, -1 otherwise;
//   - always: pn_replica equals the slow reference chip and the I and Q
//     products equal +/- the random I and Q inputs according to it.
// It runs N = 12 with the board's taps [12,6,4,1] long enough to cover a
// full 4095-chip period on the fast clock, switching TX -> RX on the fly,
// then N = 11 with taps [11,9].
`timescale 1ns/1ps
module tb_chsnd_ic;
  import chsnd_pkg::*;

  localparam int W = SAMPLE_W;

  logic clk_fast = 1'b0;
  logic clk_slow = 1'b0;
  logic rst;
  mode_e mode_ctrl;
  logic [2:0]  s_len;
  logic [12:1] sw;
  logic signed [W-1:0] i_in, q_in;
  logic pn_out, pn_replica;
  logic signed [1:0] sync_prod;
  logic signed [W:0] i_prod, q_prod;

  int checks = 0;
  int failures = 0;
  int n_sel = 12;
  int unsigned ref_fast, ref_slow;   // bit k-1 holds stage k

  chsnd_ic dut (
    .clk_fast(clk_fast), .clk_slow(clk_slow), .rst(rst), .mode_ctrl(mode_ctrl),
    .s_len(s_len), .sw(sw), .i_in(i_in), .q_in(q_in), .pn_out(pn_out),
    .sync_prod(sync_prod), .i_prod(i_prod), .q_prod(q_prod),
    .pn_replica(pn_replica));

  always #0.9 clk_fast = ~clk_fast;
  always #1.0 clk_slow = ~clk_slow;

  initial begin : watchdog
    #40000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int unsigned lfsr_next(int unsigned st, int n, logic [12:1] taps);
    int unsigned fb = (st >> (n-1)) & 1;
    for (int k = 1; k < n; k++) if (taps[k]) fb ^= (st >> (k-1)) & 1;
    return ((st << 1) | fb) & 32'hFFF;
  endfunction

  function automatic bit out_of(int unsigned st, int n);
    return 1'((st >> (n-1)) & 1);
  endfunction

  always @(posedge clk_fast or posedge rst)
    if (rst) ref_fast <= 32'hFFF;
    else     ref_fast <= lfsr_next(ref_fast, n_sel, sw);

  always @(posedge clk_slow or posedge rst)
    if (rst) ref_slow <= 32'hFFF;
    else     ref_slow <= lfsr_next(ref_slow, n_sel, sw);

  // New random I/Q samples after every fast rising edge.
  always @(posedge clk_fast) begin
    i_in <= W'($urandom);
    q_in <= W'($urandom);
  end

  task automatic check_all();
    bit fc, sc;
    int exp_sync, exp_i, exp_q;
    if (rst) return;
    fc = out_of(ref_fast, n_sel);
    sc = out_of(ref_slow, n_sel);
    exp_sync = (mode_ctrl == MODE_TX) ? 0 : ((fc == sc) ? 1 : -1);
    exp_i = sc ? int'(i_in) : -int'(i_in);
    exp_q = sc ? int'(q_in) : -int'(q_in);
    checks++;
    if (pn_out !== ((mode_ctrl == MODE_TX) ? fc : 1'b0)) begin
      failures++;
      if (failures < 10) $display("%t pn_out=%0d", $time, pn_out);
    end
    checks++;
    if (int'(sync_prod) != exp_sync) begin
      failures++;
      if (failures < 10) $display("%t sync=%0d expected %0d", $time, sync_prod, exp_sync);
    end
    checks++;
    if (pn_replica !== sc || int'(i_prod) != exp_i || int'(q_prod) != exp_q) begin
      failures++;
      if (failures < 10) $display("%t replica/I/Q mismatch", $time);
    end
  endtask

  always @(negedge clk_fast) check_all();
  always @(negedge clk_slow) check_all();

  initial begin
    rst = 1'b1;
    mode_ctrl = MODE_TX;
    n_sel = 12;
    s_len = 3'b111;
    sw = 12'b000000101001;
    i_in = '0;
    q_in = '0;
    #5 rst = 1'b0;
    repeat (4200) @(posedge clk_fast);
    mode_ctrl = MODE_RX;
    repeat (4200) @(posedge clk_fast);
    rst = 1'b1;
    n_sel = 11;
    s_len = 3'b110;
    sw = 12'b000100000000;
    #5 rst = 1'b0;
    repeat (3000) @(posedge clk_fast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
