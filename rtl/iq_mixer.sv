// Behavioural model of one sliding-correlator mixer (I or Q branch).
//
// On the chip this is an analog mixer multiplying the demodulated I (or Q)
// baseband signal s(t - t0) by the slow replica PN sequence r(t) from PNSG2.
// Here the analog input is represented by a signed SAMPLE_W-bit sample and
// the replica chip as a bipolar value (1 -> +1, 0 -> -1), so the mixer
// passes the sample for a 1 chip and negates it for a 0 chip. The output is
// one bit wider so that negating the most negative sample cannot overflow.
//
// Timing: combinational. The sample changes with the fast clock and the
// chip with the slow clock; the product is sampled by the board filter.
//
// From the paper: one mixer per I and Q branch, both fed by PNSG2. This
// design's own choices: the fixed-point representation of the analog
// signal and the bipolar chip mapping.
module iq_mixer
  import chsnd_pkg::*;
#(
  parameter int unsigned W = SAMPLE_W
) (
  input  logic signed [W-1:0] x,        // demodulated I or Q sample
  input  logic                ref_chip, // replica chip r(t) from PNSG2
  output logic signed [W:0]   y         // x * (+1 / -1)
);

  logic signed [W:0] x_ext;

  always_comb begin
    x_ext = (W+1)'(x);
    y     = ref_chip ? x_ext : -x_ext;
  end

endmodule
