// Programmable PN sequence generator (PNSG).
//
// A Fibonacci linear feedback shift register of STAGES stages, numbered
// 1..STAGES. Every clock, stage 1 takes the feedback bit and stage k takes
// stage k-1. The length word s_len (S<2:0>) picks the register length
// N = 5 + S; stage N is the output chip and always feeds back. The switch
// word sw (SW<12:1>) adds stage k to the feedback for every set bit k < N;
// bits at or above N are ignored. The feedback is the XOR of the selected
// stages, so with a primitive tap set the output is a maximal-length
// sequence of 2^N - 1 chips. Example from the evaluation board: S = 3'b111
// and SW = 12'b000000101001 give taps [12,6,4,1] and a 4095-chip sequence.
//
// Timing: one chip per rising clock edge, so the chip rate equals the clock
// rate (1 Gcps at a 1 GHz fast clock). The chip output is a register stage.
// Reset (asynchronous, active high) loads all stages with ones, a non-zero
// state from which every N starts; the same reset is shared by both PNSGs so
// that they start in phase. An assertion flags the all-zero lock-up state.
//
// From the paper: the 12-stage LFSR, SW<12:1> selecting the feedback lines,
// S<2:0> selecting the maximal length 2^N-1 with N = 5..12, the [12,6,4,1]
// example. This design's own choices: Fibonacci form, XOR (not XNOR)
// feedback, the all-ones reset state, the reset polarity, and that stage N
// is an implicit tap (the paper's example sets no SW bit for stage 12 yet
// lists 12 among the taps).
module pnsg
  import chsnd_pkg::*;
#(
  parameter int unsigned STAGES = LFSR_STAGES
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [SEL_W-1:0]     s_len,   // S<2:0>: N = 5 + S
  input  logic [STAGES:1]      sw,      // SW<STAGES:1>: feedback tap select
  output logic                 chip     // PN chip, one per clock
);

  logic [STAGES:1] q;
  logic [STAGES:1] below_n;   // stages 1..N-1
  logic [STAGES:1] last_n;    // stage N only
  logic            fb;

  always_comb begin
    for (int unsigned k = 1; k <= STAGES; k++) begin
      below_n[k] = (k < seq_stages(s_len));
      last_n[k]  = (k == seq_stages(s_len));
    end
    fb   = ^(q & ((sw & below_n) | last_n));
    chip = |(q & last_n);
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) q <= '1;
    else     q <= {q[STAGES-1:1], fb};
  end

  // An LFSR whose active stages are all zero is stuck there for ever.
  a_no_lockup: assert property (@(posedge clk) disable iff (rst) |(q & (below_n | last_n)))
    else $error("PNSG locked up: stages 1..N all zero");

endmodule
