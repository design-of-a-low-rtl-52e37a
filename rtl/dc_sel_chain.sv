// dc_sel_chain -- one-hot bit-select ring of the serializer.
//
// A chain of NBITS falling-edge D flip-flops in tandem: the first takes
// Start, every other one takes its neighbour's output, so sel[0] is Sel1
// and sel[NBITS-1] is Sel10. A one-clock high pulse on Start therefore
// walks down the chain one position per serial clock, Sel1 high in the
// period after Start, Sel10 high NBITS-1 periods later. When the reset
// circuit feeds Sel10 back as Start, the pulse returns to Sel1 in the
// period after Sel10, so the ring repeats every NBITS bit periods and each
// Selk is high for exactly one serial clock period in every round.
//
// A second flip-flop in parallel with the first, also fed by Start, gives
// isel1, an image of Sel1 that carries the load of the reset circuit
// instead of Sel1 itself.
//
// Interface: dclk is the serial clock; all flip-flops change on its
// falling edge. There is no reset: the flip-flops power up at any value and
// are cleared by holding Start low for NBITS periods (Disable).
//
// Follows the paper: ten falling-edge flip-flops, Start input, the parallel
// iSel1 flip-flop. Parameterising the length is this design's choice.
module dc_sel_chain #(
  parameter int unsigned NBITS = dc_pkg::NBITS
) (
  input  logic             dclk,
  input  logic             start,
  output logic [NBITS-1:0] sel,    // sel[k] = Sel(k+1)
  output logic             isel1
);

  always_ff @(negedge dclk) begin
    sel   <= {sel[NBITS-2:0], start};
    isel1 <= start;
  end

endmodule
