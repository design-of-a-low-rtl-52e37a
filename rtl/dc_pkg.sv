// dc_pkg -- constants shared by the HDMI transmitter data channel.
//
// The data channel turns a 10-bit parallel word into a serial bit stream,
// one bit per period of a single serial clock. NBITS is the parallel word
// width and also the length of the one-hot bit-select ring; 10 is the
// HDMI (TMDS) word width used throughout the design. The serial rate of
// 1.65 Gbit/s gives a bit period of about 606 ps, which the testbenches
// use as their clock period; nothing in the logic depends on it.
package dc_pkg;

  // Parallel input width = number of bit-select flip-flops = SEL cells.
  localparam int unsigned NBITS = 10;

  // Serial bit period in picoseconds at 1.65 Gbit/s (1e12 / 1.65e9).
  localparam int unsigned BIT_PERIOD_PS = 606;

  // Output levels of one line of the differential pair with the receiver's
  // terminations pulled up to 3.3 V (post-layout values), in units of
  // 0.1 mV so that they fit a 16-bit unsigned number.
  typedef logic [15:0] volt_t;                  // 0.1 mV per LSB
  localparam volt_t V_HIGH = 16'd32990;         // 3.2990 V, line released
  localparam volt_t V_LOW  = 16'd28019;         // 2.8019 V, line sinking

endpackage
