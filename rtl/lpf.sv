// Behavioural model of a board low-pass filter after a correlator mixer.
//
// The board filters the Sync, I and Q mixer products with an analog
// low-pass filter (100 kHz cutoff in the published RX measurements). This
// model is a first-order IIR filter sampled on the fast clock:
//   acc <= acc + x - (acc >>> SHIFT),   y = acc >>> SHIFT,
// that is y[n] = y[n-1] + (x[n] - y[n-1]) / 2^SHIFT, a single real pole with
// time constant 2^SHIFT samples. Its -3 dB cutoff is about
// f_s / (2*pi*2^SHIFT); SHIFT = 11 at f_s = 1 GHz gives about 78 kHz, the
// nearest power of two to the 100 kHz filter of the paper.
//
// Interface: x is the signed mixer product, y the filtered value in the same
// scale. acc has SHIFT+1 guard bits above the W input bits, which bounds it
// for any input sequence. Reset (asynchronous, active high) clears it.
// Timing: one sample per rising clock edge; y is a register output.
//
// From the paper: a low-pass filter on each correlator output and the
// 100 kHz cutoff. This design's own choices: the first-order form, the
// power-of-two coefficient and the fixed-point widths.
module lpf #(
  parameter int unsigned W     = 13,
  parameter int unsigned SHIFT = 11
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] x,
  output logic signed [W-1:0] y
);

  localparam int unsigned AW = W + SHIFT + 1;

  logic signed [AW-1:0] acc;
  logic signed [AW-1:0] acc_scaled;

  assign acc_scaled = acc >>> SHIFT;
  assign y          = W'(acc_scaled);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) acc <= '0;
    else     acc <= acc + AW'(x) - acc_scaled;
  end

endmodule
