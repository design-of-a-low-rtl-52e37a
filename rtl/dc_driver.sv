// dc_driver -- behavioural model of the differential output driver.
//
// This is a behavioural model of an analog output stage, not synthesizable
// logic. Each output pin has an NMOS cascode (gate at the 2.8 V bias Csc)
// above two parallel large PMOS devices to ground: for Tx+ the even and the
// odd device, for Tx- the complement-even and complement-odd device. A pin
// sinks the driver current from the receiver's 3.3 V termination while the
// cascode is biased and either of its two PMOS gates is low; otherwise it
// is released and sits at the termination voltage. Because even and odd
// bits use separate pre-drivers and devices, each device switches at most
// every other bit period.
//
// Model: tx_p / tx_n are 1 when the pin is released (high level) and 0 when
// it sinks current; vtx_p / vtx_n give the single-ended voltages, in units
// of 0.1 mV, with the post-layout levels V_HIGH = 3.2990 V and
// V_LOW = 2.8019 V (swing 0.497 V). csc is 1 while
// the cascode bias is applied. The model has no delay; the real stage has
// 104 ps rise and fall times. The model happens to be synthesizable, so the
// top can be synthesized as a whole, but it stands for transistors.
module dc_driver (
  input  logic pmos_even,    // active low, Tx+ side
  input  logic pmos_odd,     // active low, Tx+ side
  input  logic pmos_neven,   // active low, Tx- side
  input  logic pmos_nodd,    // active low, Tx- side
  input  logic csc,          // cascode bias (2.8 V) present
  output logic tx_p,         // 1 = released (high), 0 = sinking
  output logic tx_n,
  output dc_pkg::volt_t vtx_p,   // single-ended voltage, 0.1 mV units
  output dc_pkg::volt_t vtx_n
);

  always_comb begin
    tx_p  = ~(csc & (~pmos_even  | ~pmos_odd));
    tx_n  = ~(csc & (~pmos_neven | ~pmos_nodd));
    vtx_p = tx_p ? dc_pkg::V_HIGH : dc_pkg::V_LOW;
    vtx_n = tx_n ? dc_pkg::V_HIGH : dc_pkg::V_LOW;
  end

endmodule
