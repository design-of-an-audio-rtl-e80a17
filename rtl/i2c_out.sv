// i2c_out: three-state pad buffer for the codec's I2C pins.
//
// The I2C data line SDIN is bidirectional: the master drives it while it
// sends, and releases it during each acknowledge bit so that the codec can
// pull it low. The controller therefore produces a data bit (din) and a write
// enable (we). This block turns them into the pad: when we is 1 it drives din
// onto sdin, when we is 0 it leaves sdin floating (high through the board's
// pull-up, or low when the codec pulls it), and dout always returns the pad
// level to the controller. The clock cin is passed to the SCLK pad unchanged
// (the master never releases SCLK; the codec does not stretch the clock).
// The split into Din, Dout, WE and Cin follows the published block diagram,
// where this buffer sits outside the generated logic because Chisel has no
// inout ports. Purely combinational; no clock.
module i2c_out (
  input  logic din,
  output logic dout,
  input  logic we,
  input  logic cin,
  output logic sclk,
  inout  wire  sdin
);

  assign sdin = we ? din : 1'bz;
  assign dout = sdin;
  assign sclk = cin;

endmodule
