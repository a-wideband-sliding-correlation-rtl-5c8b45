// Channel sounder baseband IC: one chip that serves as the TX or the RX
// baseband of a sliding-correlation channel sounder.
//
// Structure (as in the chip's block diagram):
//   PNSG1, clocked by the fast clock (chip rate alpha), and PNSG2, clocked
//   by the slow clock (chip rate beta), are programmed identically by the
//   length word S<2:0> and the feedback word SW<12:1> and share one reset.
//   Mode Control routes PNSG1 either to the PN output (TX, 1) or into the
//   Sync mixer together with PNSG2 (RX, 0). PNSG2 also feeds the I and Q
//   mixers, which multiply the demodulated I and Q inputs by the replica.
//
// Because beta is slightly below alpha, the replica slips one chip against
// the received sequence every gamma = alpha / (alpha - beta) fast chips,
// so after low-pass filtering the I/Q products trace the channel's impulse
// response stretched in time by gamma, and the Sync product peaks once per
// T_sync = (2^N - 1) * gamma fast-clock periods. No counter sets gamma; it
// is a property of the two clock frequencies.
//
// Interface: all outputs are combinational functions of the two PNSG
// register outputs and the I/Q inputs (the mixers are analog on the chip).
// pn_replica brings the slow replica out for monitoring; the published RX
// test captured that sequence with an oscilloscope, though the paper does
// not say through which pin.
// Reset is asynchronous, active high, and shared by both clock domains.
//
// From the paper: the blocks and their connections, the shared programming
// of both PNSGs (one set of switches), the mode polarity of the diagram.
// This design's own choices: the digital sample representation of the I/Q
// inputs and of the mixer outputs.
module chsnd_ic
  import chsnd_pkg::*;
#(
  parameter int unsigned W = SAMPLE_W
) (
  input  logic                clk_fast,  // fast clock alpha
  input  logic                clk_slow,  // slow clock beta
  input  logic                rst,       // shared reset
  input  mode_e               mode_ctrl, // Mode Control: 1 TX, 0 RX
  input  logic [SEL_W-1:0]    s_len,     // S<2:0>
  input  logic [LFSR_STAGES:1] sw,       // SW<12:1>
  input  logic signed [W-1:0] i_in,      // demodulated in-phase signal
  input  logic signed [W-1:0] q_in,      // demodulated quadrature signal
  output logic                pn_out,    // PN sequence (TX mode)
  output logic signed [1:0]   sync_prod, // Sync mixer product (RX mode)
  output logic signed [W:0]   i_prod,    // I correlator mixer product
  output logic signed [W:0]   q_prod,    // Q correlator mixer product
  output logic                pn_replica // PNSG2 chip r(t), for monitoring
);

  logic pn_fast;
  logic pn_slow;

  assign pn_replica = pn_slow;

  pnsg u_pnsg1 (
    .clk   (clk_fast),
    .rst   (rst),
    .s_len (s_len),
    .sw    (sw),
    .chip  (pn_fast)
  );

  pnsg u_pnsg2 (
    .clk   (clk_slow),
    .rst   (rst),
    .s_len (s_len),
    .sw    (sw),
    .chip  (pn_slow)
  );

  sync_mixer u_sync_mixer (
    .mode      (mode_ctrl),
    .pn_fast   (pn_fast),
    .pn_slow   (pn_slow),
    .pn_out    (pn_out),
    .sync_prod (sync_prod)
  );

  iq_mixer #(.W(W)) u_mixer_i (
    .x        (i_in),
    .ref_chip (pn_slow),
    .y        (i_prod)
  );

  iq_mixer #(.W(W)) u_mixer_q (
    .x        (q_in),
    .ref_chip (pn_slow),
    .y        (q_prod)
  );

endmodule
