// End-to-end testbench: a two-board sliding-correlation sounder.
//
// Board TX runs in TX mode; its PN chips pass through a channel emulator
// that adds three replicas delayed by 100, 101 and 103 chips (1 chip = 1 ns
// at 1 Gcps) and attenuated by 4.5, 6 and 10.5 dB: a line-of-sight path
// and two multipath components 1 ns and 2 ns apart. The sum is the RX
// board's I input; the Q input is the same signal times -1/2, as a fixed
// carrier phase would give. Both boards use N = 11 (S = 3'b110, taps
// [11,9]) and the same fast clock and reset.
//
// The slow clock period is gamma/(gamma-1) times the fast one, so the
// slide factor is gamma (GAMMA below, reduced from the paper's 20000 to
// keep the run short; the filter time constant is reduced with it). The RX
// board starts in TX mode and is switched to RX mode part way through the
// first correlation period.
//
// Checked (expected values come from the sliding-correlation arithmetic,
// not from the design):
//   - TX board: pn_out has period 2047 chips, one chip per fast cycle;
//   - RX board: pn_out is held low in RX mode, Sync is idle in TX mode;
//   - Sync peaks (time-stamped where the filter output rises through half
//     scale): exactly two in the run, 2047 * GAMMA fast cycles apart
//     (T_sync = L * gamma), each near full scale;
//   - I PDP after the first RX Sync peak, read at each undilated delay of
//     96..107 ns ((d + 1/2) * GAMMA fast cycles after the peak): 10^(-4.5/20),
//     10^(-6/20) and 10^(-10.5/20) of the input scale at 100, 101 and
//     103 ns, zero at the others, so paths 1 ns apart are resolved;
//     the largest I value lies at the 100 ns line-of-sight delay;
//   - Q PDP: at the same delays, -1/2 of the expected I values.
// Each mechanism (TX output, mode switch, Sync peak, I and Q PDP peak) is
// counted, and one that never happened counts as a failure.
`timescale 1ps/1ps
module tb_chsnd_evb;
  import chsnd_pkg::*;

  localparam int W      = SAMPLE_W;
  localparam int GAMMA  = 4000;
  localparam int SHIFT  = 9;
  localparam int L      = 2047;
  localparam int TAU    = (1 << SHIFT);  // filter time constant, fast cycles
  localparam int AMP    = 1000;            // input scale of one unit path
  localparam int FS     = (1 << (W-1)) - 1;
  localparam int TF_HALF = GAMMA - 1;      // fast period 2*(GAMMA-1) ps
  localparam int TS_HALF = GAMMA;          // slow period 2*GAMMA ps
  localparam int D0 = 100, D1 = 101, D2 = 103;

  logic clk_fast = 1'b0;
  logic clk_slow = 1'b0;
  logic rst;
  mode_e mode_tx, mode_rx;
  logic [2:0]  s_len = 3'b110;
  logic [12:1] sw    = 12'b000100000000;
  logic signed [W-1:0] i_in, q_in;
  logic signed [W-1:0] zero_in = '0;

  logic pn_tx, pn_rx, rep_tx, rep_rx;
  logic signed [W:0] sync_tx, sync_rx, i_tx, i_rx, q_tx, q_rx;

  int checks = 0;
  int failures = 0;
  int n_tx_chips = 0, n_mode_switch = 0, n_sync_peaks = 0, n_i_peaks = 0, n_q_peaks = 0;

  chsnd_evb #(.LPF_SHIFT(SHIFT)) u_tx (
    .clk_fast(clk_fast), .clk_slow(clk_slow), .rst(rst), .mode_ctrl(mode_tx),
    .s_len(s_len), .sw(sw), .i_in(zero_in), .q_in(zero_in), .pn_out(pn_tx),
    .sync_out(sync_tx), .i_pdp(i_tx), .q_pdp(q_tx), .pn_replica(rep_tx));

  chsnd_evb #(.LPF_SHIFT(SHIFT)) u_rx (
    .clk_fast(clk_fast), .clk_slow(clk_slow), .rst(rst), .mode_ctrl(mode_rx),
    .s_len(s_len), .sw(sw), .i_in(i_in), .q_in(q_in), .pn_out(pn_rx),
    .sync_out(sync_rx), .i_pdp(i_rx), .q_pdp(q_rx), .pn_replica(rep_rx));

  always #(TF_HALF) clk_fast = ~clk_fast;
  always #(TS_HALF) clk_slow = ~clk_slow;

  localparam longint RUN = longint'(2) * L * GAMMA + 110 * GAMMA;

  initial begin : watchdog
    repeat (int'(RUN) + 50000) @(posedge clk_fast);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- channel emulator ----------------
  logic [127:0] hist = '0;    // hist[d] = TX chip d fast cycles ago
  real a0, a1, a2;
  initial begin
    a0 = 10.0 ** (-4.5 / 20.0);
    a1 = 10.0 ** (-6.0 / 20.0);
    a2 = 10.0 ** (-10.5 / 20.0);
  end

  function automatic real bip(logic b);
    return b ? 1.0 : -1.0;
  endfunction

  always @(posedge clk_fast) begin
    real s;
    logic [127:0] h;
    h = {hist[126:0], pn_tx};
    hist <= h;
    s = real'(AMP) * (a0 * bip(h[D0-1]) + a1 * bip(h[D1-1]) + a2 * bip(h[D2-1]));
    i_in <= W'($rtoi(s));
    q_in <= W'($rtoi(-s / 2.0));
  end

  // ---------------- observation ----------------
  longint cyc = 0;                       // fast cycles since reset release
  bit     tx_seq[0:2*L-1];
  longint sync_peak_t[$];
  int     sync_peak_v[$];
  // Sync peak search state.
  int     sp_best;
  longint sp_best_t;
  bit     sp_in;
  // PDP record after the second Sync peak.
  int     irec[$], qrec[$];

  always @(negedge clk_fast) begin
    if (!rst) begin
      if (cyc < 2*L) tx_seq[int'(cyc)] = pn_tx;
      if (mode_tx == MODE_TX) n_tx_chips++;
      // RX board idle outputs.
      if (mode_rx == MODE_RX && pn_rx !== 1'b0) begin
        checks++; failures++;
        $display("RX board drives pn_out in RX mode");
      end
      if (mode_rx == MODE_TX && sync_rx != 0 && cyc > 0) begin
        // filter output decays from reset value 0, so it must stay 0.
        checks++; failures++;
        $display("Sync active in TX mode at cycle %0d", cyc);
      end
      // Sync peak detection: a peak starts when the filter output rises
      // through half scale (its time stamp) and ends below a quarter of it;
      // its height is the largest value in between.
      if (int'(sync_rx) > FS / 2) begin
        if (!sp_in) begin
          sp_best = int'(sync_rx);
          sp_best_t = cyc;
        end else if (int'(sync_rx) > sp_best) begin
          sp_best = int'(sync_rx);
        end
        sp_in = 1'b1;
      end else if (sp_in && int'(sync_rx) < FS / 4) begin
        sp_in = 1'b0;
        sync_peak_t.push_back(sp_best_t);
        sync_peak_v.push_back(sp_best);
        n_sync_peaks++;
      end
      if (sync_peak_t.size() >= 1 && cyc > sync_peak_t[0] + 95*GAMMA
          && cyc <= sync_peak_t[0] + 108*GAMMA) begin
        irec.push_back(int'(i_rx));
        qrec.push_back(int'(q_rx));
      end
      cyc++;
    end
  end

  // ---------------- stimulus and final checks ----------------
  initial begin : main
    int per;
    bit ok;
    longint dt;
    rst = 1'b1;
    mode_tx = MODE_TX;
    mode_rx = MODE_TX;
    sp_in = 1'b0;
    sp_best = 0;
    sp_best_t = 0;
    i_in = '0;
    q_in = '0;
    #(10 * TS_HALF) rst = 1'b0;
    repeat (L * GAMMA / 2) @(posedge clk_fast);
    mode_rx = MODE_RX;
    n_mode_switch++;
    repeat (int'(RUN) - L * GAMMA / 2) @(posedge clk_fast);

    // TX: period of pn_out.
    per = 0;
    for (int p = 1; p <= L && per == 0; p++) begin
      ok = 1;
      for (int i = 0; i < L && ok; i++) if (tx_seq[i] != tx_seq[i+p]) ok = 0;
      if (ok) per = p;
    end
    checks++;
    if (per != L) begin
      failures++;
      $display("TX period %0d, expected %0d", per, L);
    end

    // Sync: two peaks, L*GAMMA apart, near full scale.
    checks++;
    if (sync_peak_t.size() != 2) begin
      failures++;
      $display("%0d Sync peaks, expected 2", sync_peak_t.size());
    end else begin
      dt = sync_peak_t[1] - sync_peak_t[0];
      $display("Sync peaks at %0d and %0d, T_sync = %0d fast cycles (expected %0d)",
               sync_peak_t[0], sync_peak_t[1], dt, L * GAMMA);
      checks++;
      // The half-scale crossing moves with the filter's noise level just
      // before the peak: allow an eighth of the filter time constant.
      if (dt < L * GAMMA - TAU / 8 || dt > L * GAMMA + TAU / 8) begin
        failures++;
        $display("T_sync %0d, expected %0d", dt, L * GAMMA);
      end
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (sync_peak_v[k] < FS * 8 / 10) begin
          failures++;
          $display("Sync peak %0d height %0d below 0.8 of %0d", k, sync_peak_v[k], FS);
        end
      end
    end

    // I/Q PDP: the undilated delay d of the record is (t - t_sync) / GAMMA.
    // The filters sample the mixer products once per fast chip, so a path
    // of delay d contributes its full amplitude while the replica has
    // slipped between d and d+1 chips and nothing outside; the record is
    // read in the middle of each such interval, where the expected value
    // is the path amplitude (paths at 100, 101, 103) or zero.
    n_i_peaks = 0;
    for (int d = 96; d <= 107; d++) begin
      int want, got, gq, idx;
      want = 0;
      if (d == D0) want = $rtoi(a0 * AMP);
      if (d == D1) want = $rtoi(a1 * AMP);
      if (d == D2) want = $rtoi(a2 * AMP);
      idx  = d * GAMMA + GAMMA / 2 - (95 * GAMMA + 1);
      got  = irec[idx];
      gq   = qrec[idx];
      if (want != 0) begin
        $display("delay %0d ns: I %0d (expected %0d), Q %0d (expected %0d)",
                 d, got, want, gq, -want / 2);
        if (got > AMP / 5) n_i_peaks++;
        if (gq < -AMP * 12 / 100) n_q_peaks++;
      end
      checks++;
      if (got < want - AMP * 12 / 100 || got > want + AMP * 12 / 100) begin
        failures++;
        $display("I PDP at delay %0d ns: %0d, expected %0d", d, got, want);
      end
      checks++;
      if (gq < -want / 2 - AMP * 12 / 100 || gq > -want / 2 + AMP * 12 / 100) begin
        failures++;
        $display("Q PDP at delay %0d ns: %0d, expected %0d", d, gq, -want / 2);
      end
    end
    // The largest I value of the record lies at the line-of-sight delay.
    begin
      int best, best_i;
      best = -(1 << 30);
      best_i = 0;
      foreach (irec[i]) if (irec[i] > best) begin best = irec[i]; best_i = i; end
      best_i += 95 * GAMMA + 1;
      checks++;
      if (best_i < D0 * GAMMA || best_i > D0 * GAMMA + GAMMA) begin
        failures++;
        $display("PDP maximum at %0d cycles after Sync, expected in [%0d, %0d]",
                 best_i, D0 * GAMMA, D0 * GAMMA + GAMMA);
      end
    end

    $display("mechanisms: tx_chips=%0d mode_switches=%0d sync_peaks=%0d i_peaks=%0d q_peaks=%0d",
             n_tx_chips, n_mode_switch, n_sync_peaks, n_i_peaks, n_q_peaks);
    checks++;
    if (n_tx_chips == 0 || n_mode_switch == 0 || n_sync_peaks == 0 || n_i_peaks == 0 || n_q_peaks == 0) begin
      failures++;
      $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
