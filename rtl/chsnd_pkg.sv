// Shared constants and types of the sliding-correlation channel sounder.
//
// The sequence generators are 12-stage linear feedback shift registers
// (LFSRs). The three-bit length word S<2:0> selects the register length
// N = N_MIN + S, so S = 3'b111 gives N = 12 (a 4095-chip m-sequence) and
// S = 3'b110 gives N = 11 (2047 chips); lengths 5 to 12 are reachable.
// The 12-stage register, the N range and these two encodings follow the
// published evaluation board; the linear mapping N = 5 + S in between is
// this design's own reading of those two points.
//
// Mode Control: 1 selects TX (the fast PN sequence is driven out), 0
// selects RX (sliding correlation and Sync). This follows the board's
// block diagram and its RX measurement, where 0 selected RX; one text
// description of the pin states the opposite polarity.
//
// Analog inputs and correlator outputs are represented here by signed
// fixed-point samples of SAMPLE_W bits; that width is this design's choice.
package chsnd_pkg;

  localparam int unsigned LFSR_STAGES = 12;
  localparam int unsigned N_MIN       = 5;
  localparam int unsigned SEL_W       = 3;

  // Width of the signed samples standing in for the analog I/Q inputs.
  localparam int unsigned SAMPLE_W    = 12;

  typedef enum logic {
    MODE_RX = 1'b0,
    MODE_TX = 1'b1
  } mode_e;

  // Register length N selected by S<2:0>.
  function automatic int unsigned seq_stages(input logic [SEL_W-1:0] s);
    return N_MIN + int'(s);
  endfunction

endpackage
