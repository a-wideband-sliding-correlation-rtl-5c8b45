// Channel sounder evaluation board baseband (top level).
//
// The board carries the channel sounder IC, the programming switches that
// set its length word S<2:0>, Mode Control and feedback word SW<12:1>, and
// the low-pass filters that turn the IC's mixer products into the Sync
// timing signal and the time-dilated I and Q power delay profiles. Two such
// boards form a sounder: one in TX mode drives its PN output to the
// upconverter, the other in RX mode correlates the downconverted I/Q
// signals against its slower replica.
//
// The Sync product (+1/-1) is scaled to a full-scale level of
// 2^(W-1) - 1 before filtering, standing for the board's output amplitude,
// so that all three filters see the same signal scale as the I/Q products.
//
// Interface: i_in/q_in are signed samples on the fast clock; sync_out,
// i_pdp and q_pdp are filter outputs updated every fast-clock edge; pn_out
// is the TX chip stream at one chip per fast-clock cycle; pn_replica is the
// slow replica r(t), one chip per slow-clock cycle. The switch words
// are static settings; change them only while rst is high.
//
// From the paper: the filters after the correlator mixers and the Sync
// mixer, the 100 kHz cutoff (LPF_SHIFT = 11 at a 1 GHz fast clock), the
// switch words. This design's own choices: the filter form, the sample
// widths, clocking the filters by the fast clock and the Sync scaling.
module chsnd_evb
  import chsnd_pkg::*;
#(
  parameter int unsigned W         = SAMPLE_W,
  parameter int unsigned LPF_SHIFT = 11
) (
  input  logic                 clk_fast,
  input  logic                 clk_slow,
  input  logic                 rst,
  input  mode_e                mode_ctrl,
  input  logic [SEL_W-1:0]     s_len,
  input  logic [LFSR_STAGES:1] sw,
  input  logic signed [W-1:0]  i_in,
  input  logic signed [W-1:0]  q_in,
  output logic                 pn_out,
  output logic signed [W:0]    sync_out,
  output logic signed [W:0]    i_pdp,
  output logic signed [W:0]    q_pdp,
  output logic                 pn_replica
);

  localparam logic signed [W:0] FULL_SCALE = (W+1)'((1 << (W-1)) - 1);

  logic signed [1:0] sync_prod;
  logic signed [W:0] sync_level;
  logic signed [W:0] i_prod;
  logic signed [W:0] q_prod;

  chsnd_ic #(.W(W)) u_ic (
    .clk_fast  (clk_fast),
    .clk_slow  (clk_slow),
    .rst       (rst),
    .mode_ctrl (mode_ctrl),
    .s_len     (s_len),
    .sw        (sw),
    .i_in      (i_in),
    .q_in      (q_in),
    .pn_out    (pn_out),
    .sync_prod (sync_prod),
    .i_prod    (i_prod),
    .q_prod    (q_prod),
    .pn_replica(pn_replica)
  );

  always_comb begin
    unique case (sync_prod)
      2'sd1:   sync_level = FULL_SCALE;
      -2'sd1:  sync_level = -FULL_SCALE;
      default: sync_level = '0;
    endcase
  end

  lpf #(.W(W+1), .SHIFT(LPF_SHIFT)) u_lpf_sync (
    .clk (clk_fast), .rst (rst), .x (sync_level), .y (sync_out)
  );

  lpf #(.W(W+1), .SHIFT(LPF_SHIFT)) u_lpf_i (
    .clk (clk_fast), .rst (rst), .x (i_prod), .y (i_pdp)
  );

  lpf #(.W(W+1), .SHIFT(LPF_SHIFT)) u_lpf_q (
    .clk (clk_fast), .rst (rst), .x (q_prod), .y (q_pdp)
  );

endmodule
