// Mode Control switch and Sync mixer.
//
// The fast PN chip of PNSG1 goes through a switch set by Mode Control. In
// TX mode the chip is driven to the PN output and the Sync mixer has no
// input, so its product is held at zero. In RX mode the PN output is held
// low and the chip is multiplied by the slow replica chip of PNSG2. Chips
// are treated as bipolar values (1 -> +1, 0 -> -1), so the product is +1
// when the two chips agree and -1 when they differ. Low-pass filtering this
// product (done on the board) gives the periodic Sync peaks that mark the
// instants where the two sequences are aligned.
//
// Timing: purely combinational, like the analog switch and mixer it stands
// for; its inputs come from two different clock domains, and the product is
// sampled downstream by the filter.
//
// From the paper: the switch position per mode (1 = TX, 0 = RX, as in the
// block diagram and the RX measurement), the PNSG1 x PNSG2 product as Sync.
// This design's own choices: the bipolar mapping, the zero product in TX
// mode and the low PN output in RX mode (the paper does not say what the
// unused outputs carry).
module sync_mixer
  import chsnd_pkg::*;
(
  input  mode_e             mode,      // Mode Control
  input  logic              pn_fast,   // PNSG1 chip (chip rate alpha)
  input  logic              pn_slow,   // PNSG2 chip (chip rate beta)
  output logic              pn_out,    // PN sequence output (TX mode)
  output logic signed [1:0] sync_prod  // Sync product, -1/0/+1 (RX mode)
);

  always_comb begin
    if (mode == MODE_TX) begin
      pn_out    = pn_fast;
      sync_prod = 2'sd0;
    end else begin
      pn_out    = 1'b0;
      sync_prod = (pn_fast == pn_slow) ? 2'sd1 : -2'sd1;
    end
  end

endmodule
