// dc_hold_ff -- hold flip-flops for the last bits of the parallel word.
//
// The SEL cells take a new word when Sel9 rises, but at that moment the
// ninth and tenth bits of the word being sent are still to be output (at
// Sel9 and Sel10). So those two bits do not come from the input bus; they
// come from these flip-flops, which take D8 and D9 earlier in the round,
// when Sel3 rises, and keep them until the SEL cells 9 and 10 have loaded
// them. This gives the channel its first-in first-out behaviour: the input
// word has to be valid only between Sel9 rising and the next Sel3 rising.
//
// Interface: on a falling edge of dclk with load high (the top drives load
// so that this is the edge at which Sel3 rises), q takes d. WIDTH is 2 for
// the two bits D8 and D9.
//
// Follows the paper: two clocked D flip-flops fed by D8/D9, clocked from
// Sel3 (through the FDL buffer), feeding the last two SEL cells. Capturing
// at the rising edge of Sel3 rather than its falling edge is this design's
// choice; either works with the input window above.
module dc_hold_ff #(
  parameter int unsigned WIDTH = 2
) (
  input  logic             dclk,
  input  logic             load,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  always_ff @(negedge dclk) begin
    if (load) q <= d;
  end

endmodule
