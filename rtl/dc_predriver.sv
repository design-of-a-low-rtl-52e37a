// dc_predriver -- one pre-driver channel with its wired-AND input.
//
// The input node of a pre-driver has an always-on PMOS pull-up (two PMOS
// in series with grounded gates) and is connected to the open-drain
// outputs of FANIN SEL cells. Since at most one of them is selected at a
// time, the node is an active-low multiplexer: it is low exactly when the
// selected cell pulls it low. Two inverter stages (the second with four
// fingers) then buffer it to drive the large output transistors, so the
// output has the polarity of the input node.
//
// Logic: out_n = AND of all in_n (wired-AND, then two inversions).
// Combinational, no clock.
//
// Follows the paper: pull-up at the input, five SEL outputs per channel,
// two inverter stages. Four instances are used: Even, Odd and their
// complements nEven and nOdd.
module dc_predriver #(
  parameter int unsigned FANIN = dc_pkg::NBITS / 2
) (
  input  logic [FANIN-1:0] in_n,   // open-drain SEL outputs, low = pull
  output logic             out_n   // to a driver PMOS gate, low = on
);

  always_comb begin
    out_n = &in_n;
  end

endmodule
