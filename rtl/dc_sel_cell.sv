// dc_sel_cell -- SEL block: holds one data bit and drives it onto the
// shared active-low lines while its bit-select signal is high.
//
// Storage: a master-slave register (clocked-CMOS latches on the Read and
// Show clocks in the transistor circuit). Here it is a falling-edge
// register with a load enable: when load is high at a falling edge of dclk
// the cell takes d. The top drives load so that this is the edge at which
// Sel9 rises, which is where the Read/Show clocks derived from Sel9 make
// the slave latch transparent.
//
// Output: two open-drain pull-down stacks, each an NMOS gated by sel in
// series with an NMOS gated by the stored bit or its complement. They are
// modelled as active-low signals: q_n is low while sel is high and the
// stored bit is 1; nq_n is low while sel is high and the bit is 0; both
// are high (released) while sel is low. The pull-up that makes these
// wired-AND lines is in the pre-driver.
//
// Follows the paper: register on Read/Show, two NMOS pull-down outputs Q and
// nQ gated by Sel. The active-high polarity of the stored bit on Q is this
// design's reading of the schematic.
module dc_sel_cell (
  input  logic dclk,
  input  logic load,   // take d at this falling edge (Sel9 rising)
  input  logic d,
  input  logic sel,    // this cell's bit-select, Selk
  output logic q_n,    // pulled low: selected and bit = 1
  output logic nq_n    // pulled low: selected and bit = 0
);

  logic bit_q;

  always_ff @(negedge dclk) begin
    if (load) bit_q <= d;
  end

  always_comb begin
    q_n  = ~(sel &  bit_q);
    nq_n = ~(sel & ~bit_q);
  end

endmodule
