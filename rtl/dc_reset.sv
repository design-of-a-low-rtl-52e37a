// dc_reset -- Start generator (the "reset circuit") of the data channel.
//
// Start feeds the first flip-flop of the bit-select ring. It goes high for
// two reasons:
//   * Enable kick: if, at a rising edge of dclk, Disable was low and Enable
//     high, Start is driven high at the following falling edge and stays
//     high for one clock period. The user must take Enable low again before
//     the next rising edge, so that exactly one token enters the ring.
//   * Recirculation: while Disable and Enable are both low, Start follows
//     the buffered Sel10, so the token leaving Sel10 re-enters at Sel1.
// Raising Disable blocks both, so the ring drains in NBITS clock periods.
// Disable for one pixel period (NBITS bit periods) and then an Enable
// pulse form the power-on reset: the ring, which may hold anything at
// power-up, is emptied and then receives a single token.
//
// Timing: Disable and Enable are sampled at the rising edge of dclk (so they
// may change at any time away from it); the kick register changes on the
// falling edge, like the ring. The recirculation path is combinational from
// sel10, so Start nearly coincides with Sel10 and Sel1 follows one period
// later.
//
// Follows the paper: the conditions for Start and the sampling on the
// rising edge before the falling edge that drives Start. The circuit itself
// (two sampling flip-flops, a falling-edge kick flip-flop and an AND-OR) is
// this design's, since its schematic was not available.
module dc_reset (
  input  logic dclk,
  input  logic disable_i,    // Disable: stop the ring after this round
  input  logic enable_i,     // Enable: one-clock pulse starts the ring
  input  logic sel10,        // Buffered_Sel10, last bit-select output
  output logic start
);

  logic dis_q, en_q;   // Disable and Enable as seen at the rising edge
  logic kick;          // one-period Start pulse from Enable

  always_ff @(posedge dclk) begin
    dis_q <= disable_i;
    en_q  <= enable_i;
  end

  always_ff @(negedge dclk) begin
    kick <= en_q & ~dis_q;
  end

  always_comb begin
    start = kick | (~dis_q & ~en_q & sel10);
  end

  // Enable is a single-clock pulse: it must be low again at the next rising
  // edge, otherwise more than one token would enter the ring.
  a_enable_one_clock : assert property (@(posedge dclk) enable_i |=> !enable_i)
    else $error("Enable held high for more than one clock period");

endmodule
