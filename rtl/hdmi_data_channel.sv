// hdmi_data_channel -- one data channel of an HDMI transmitter: a 10-bit
// parallel word in, a differential serial stream at the serial clock rate
// (1.65 Gbit/s) out, using nothing but that one clock.
//
// Structure (one module per block):
//   dc_reset      makes Start from Enable/Disable and the recirculated Sel10.
//   dc_sel_chain  ring of NBITS falling-edge flip-flops; a single token makes
//                 Sel1..SelN high one after another, one bit period each.
//   dc_sel_cell   NBITS SEL cells, one per bit. Each holds its bit and pulls
//                 one of two shared active-low lines low while its Sel is high.
//   dc_hold_ff    hold flip-flops for the last two bits (D8, D9).
//   dc_predriver  four wired-AND pre-driver channels: Even, Odd, nEven, nOdd.
//   dc_driver     output stage model, Tx+ sinks for Even/Odd, Tx- for
//                 nEven/nOdd.
//
// Word timing (k counts rounds of the ring, a round is NBITS bit periods,
// i.e. one pixel clock period):
//   * At the falling edge where Sel(N-1) rises in round k-1 the SEL cells of
//     bits 0..N-3 take d[N-3:0] of word k, and SEL cells N-2, N-1 take the hold
//     flip-flops (bits N-2, N-1 of word k-1, which are still to be sent).
//   * At the falling edge where Sel3 rises in round k the hold flip-flops take
//     d[N-1:N-2] of word k.
//   So word k must be on d from the first of these edges to the second, and
//   the next word may be applied any time after Sel3 rises and before Sel(N-1)
//   rises. Word k goes out in round k, bit 0 first, bit i while Sel(i+1) is
//   high; bits 0, 2, 4.. use the Even lines, bits 1, 3, 5.. the Odd lines.
//
// Output coding: for a 1 bit Tx+ sinks current (low) and Tx- is released
// (high); for a 0 bit the reverse. With no token in the ring, or with the
// bias off, both pins are released (standby).
//
// Control: there is no reset pin. After power-up hold disable_i high for at
// least NBITS clock periods, take it low, and pulse enable_i high for one
// clock period; the first bit period (Sel1) starts 1.5 clock periods after
// the rising edge at which Enable was seen. disable_i stops the ring; it is
// empty within NBITS + 1 periods. Both are sampled at the rising edge of dclk.
//
// The clock splitter, FO4 buffer and the FD/FDL clock buffers of the
// transistor design are wires here: the ring uses the falling edge of dclk,
// Sel10 feeds the reset logic directly, and the SEL cells and hold
// flip-flops use load enables from the ring (Sel(N-2) and Sel2, so that they
// load at the edges where Sel(N-1) and Sel3 rise).
module hdmi_data_channel #(
  parameter int unsigned NBITS = dc_pkg::NBITS
) (
  input  logic             dclk,       // serial clock from the PLL
  input  logic             disable_i,
  input  logic             enable_i,
  input  logic             bias,       // 2.8 V cascode bias applied
  input  logic [NBITS-1:0] d,          // parallel word D0..D9
  output logic             tx_p,       // 1 = high level, 0 = sinking
  output logic             tx_n,
  output dc_pkg::volt_t    vtx_p,      // single-ended voltages, 0.1 mV
  output dc_pkg::volt_t    vtx_n,
  output logic             start,      // internal signals brought out
  output logic             isel1,
  output logic [NBITS-1:0] sel         // sel[k] = Sel(k+1)
);

  localparam int unsigned HALF = NBITS / 2;

  // The even/odd split needs an even width; the hold scheme needs Sel3 to
  // come before Sel(N-1).
  if (NBITS % 2 != 0 || NBITS < 6) begin : g_bad_width
    $error("hdmi_data_channel: NBITS must be even and at least 6");
  end

  // ---------------------------------------------------------------- control
  dc_reset u_reset (
    .dclk      (dclk),
    .disable_i (disable_i),
    .enable_i  (enable_i),
    .sel10     (sel[NBITS-1]),
    .start     (start)
  );

  dc_sel_chain #(.NBITS(NBITS)) u_chain (
    .dclk  (dclk),
    .start (start),
    .sel   (sel),
    .isel1 (isel1)
  );

  // Load enables: high in the period before Sel(N-1) resp. Sel3 rises.
  logic load_word, load_hold;
  assign load_word = sel[NBITS-3];
  assign load_hold = sel[1];

  // ------------------------------------------------------------------- FIFO
  logic [1:0]       hold_q;
  logic [NBITS-1:0] cell_d;
  logic [NBITS-1:0] q_n, nq_n;

  dc_hold_ff #(.WIDTH(2)) u_hold (
    .dclk (dclk),
    .load (load_hold),
    .d    (d[NBITS-1:NBITS-2]),
    .q    (hold_q)
  );

  assign cell_d = {hold_q, d[NBITS-3:0]};

  for (genvar i = 0; i < NBITS; i++) begin : g_sel
    dc_sel_cell u_cell (
      .dclk (dclk),
      .load (load_word),
      .d    (cell_d[i]),
      .sel  (sel[i]),
      .q_n  (q_n[i]),
      .nq_n (nq_n[i])
    );
  end

  // ------------------------------------------------- even / odd pre-drivers
  logic [HALF-1:0] even_q_n, odd_q_n, even_nq_n, odd_nq_n;

  for (genvar j = 0; j < HALF; j++) begin : g_split
    assign even_q_n[j]  = q_n[2*j];
    assign odd_q_n[j]   = q_n[2*j+1];
    assign even_nq_n[j] = nq_n[2*j];
    assign odd_nq_n[j]  = nq_n[2*j+1];
  end

  logic even_n, odd_n, neven_n, nodd_n;

  dc_predriver #(.FANIN(HALF)) u_pd_even  (.in_n(even_q_n),  .out_n(even_n));
  dc_predriver #(.FANIN(HALF)) u_pd_odd   (.in_n(odd_q_n),   .out_n(odd_n));
  dc_predriver #(.FANIN(HALF)) u_pd_neven (.in_n(even_nq_n), .out_n(neven_n));
  dc_predriver #(.FANIN(HALF)) u_pd_nodd  (.in_n(odd_nq_n),  .out_n(nodd_n));

  // ----------------------------------------------------------------- driver
  dc_driver u_driver (
    .pmos_even  (even_n),
    .pmos_odd   (odd_n),
    .pmos_neven (neven_n),
    .pmos_nodd  (nodd_n),
    .csc        (bias),
    .tx_p       (tx_p),
    .tx_n       (tx_n),
    .vtx_p      (vtx_p),
    .vtx_n      (vtx_n)
  );

endmodule
