// tb_hdmi_data_channel -- end-to-end test of the data channel at its
// default size (10-bit words, one serial clock).
//
// The channel powers up with random flip-flop contents. The test then:
//   1. holds Disable for one pixel period and checks that the ring is empty
//      and both output pins are released (power-on reset, first half);
//   2. pulses Enable and checks that Sel1 follows 1.5 clock periods after
//      the rising edge that saw it (second half);
//   3. streams random 10-bit words, each applied in the Sel4 period of the
//      round before it is due, so it stays on the bus across the Sel9 load of
//      the SEL cells and the Sel3 load of the hold flip-flops; every bit
//      period it decodes the bit from Tx+/Tx- (1: Tx+ sinking, Tx- released)
//      and at Sel10 compares the round's word with the one applied;
//   4. checks the round time (10 bit periods per word), that even bits use
//      only the Even/nEven pre-drivers and odd bits only Odd/nOdd, and that
//      at most one of each complementary pair is active;
//   5. disables the channel mid-stream, checks it stops within a pixel
//      period, re-enables it and checks that disable plus enable take no
//      more than two pixel periods, then streams again;
//   6. removes the cascode bias for a while and checks the standby state.
// Each mechanism is counted; one that never happened counts as a failure.
`timescale 1ps/1ps
module tb_hdmi_data_channel;
  localparam int unsigned N = dc_pkg::NBITS;
  localparam int unsigned T = dc_pkg::BIT_PERIOD_PS;

  logic         dclk = 1'b0;
  logic         disable_i, enable_i, bias;
  logic [N-1:0] d;
  logic         tx_p, tx_n, start, isel1;
  dc_pkg::volt_t vtx_p, vtx_n;
  logic [N-1:0] sel;

  int checks = 0, failures = 0;

  always #(T/2) dclk = ~dclk;

  hdmi_data_channel dut (
    .dclk(dclk), .disable_i(disable_i), .enable_i(enable_i), .bias(bias), .d(d),
    .tx_p(tx_p), .tx_n(tx_n), .vtx_p(vtx_p), .vtx_n(vtx_n),
    .start(start), .isel1(isel1), .sel(sel)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s (sel=%b tx_p=%b tx_n=%b)", $time, what, sel, tx_p, tx_n);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge dclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ bookkeeping
  int           cycle = 0;         // rising edges so far
  int           round = 0;         // Sel1 periods seen
  logic [N-1:0] exp_word [int];    // expected word per round
  logic [N-1:0] got;
  bit           driving = 0;       // apply words at Sel4
  bit           monitor = 0;       // off until the power-on flush is done
  int           last_sel1 = -1;
  int           n_words_ok = 0, n_recirc = 0, n_hold = 0, n_even = 0, n_odd = 0;
  int           n_standby = 0, n_enable = 0, n_disable = 0;
  logic [N-1:0] sent_word;         // word currently being serialised

  // Monitor and bus driver, both at the rising edge (mid bit period).
  always @(posedge dclk) begin
    cycle++;
    if (!monitor) begin
      // power-on contents still in the ring
    end else if (sel != '0) begin
      int p;
      check($onehot(sel), "one bit selected");
      p = 0;
      for (int k = 0; k < N; k++) if (sel[k]) p = k;
      if (p == 0) begin
        round++;
        if (last_sel1 >= 0) begin
          check(cycle - last_sel1 == N, $sformatf("round time %0d", cycle - last_sel1));
          n_recirc++;
        end
        last_sel1 = cycle;
        got = '0;
      end
      if (bias) begin
        // Decode and check the line code.
        check(tx_p != tx_n, "complementary pins");
        check(vtx_p == (tx_p ? 16'd32990 : 16'd28019), "Tx+ level");
        got[p] = ~tx_p;
        // Even/odd separation.
        if (p % 2 == 0) begin
          check(dut.odd_n && dut.nodd_n, "odd lines idle in even bit");
          check(dut.even_n != dut.neven_n, "one even line active");
          n_even++;
        end else begin
          check(dut.even_n && dut.neven_n, "even lines idle in odd bit");
          check(dut.odd_n != dut.nodd_n, "one odd line active");
          n_odd++;
        end
        // Hold flip-flops: the bus already carries the next word while the
        // last two bits of this one go out.
        if (p >= N - 2 && exp_word.exists(round) && d[p] != exp_word[round][p]) n_hold++;
      end else begin
        check(tx_p && tx_n, "standby with bias off");
        n_standby++;
      end
      if (p == N - 1 && bias && exp_word.exists(round)) begin
        check(got == exp_word[round],
              $sformatf("round %0d word got %h exp %h", round, got, exp_word[round]));
        if (got == exp_word[round]) n_words_ok++;
      end
      if (p == 3 && driving) begin
        d = N'($urandom);
        exp_word[round + 1] = d;
      end
    end else begin
      check(tx_p && tx_n, "idle pins released");
    end
  end

  // --------------------------------------------------------------- sequence
  task automatic disable_and_enable(input bit mid_stream);
    int t0, t_empty, t_sel1;
    @(negedge dclk);
    disable_i = 1'b1;
    t0 = cycle;
    exp_word.delete();
    // Ring empty within a pixel period.
    while (sel != '0) @(posedge dclk);
    t_empty = cycle;
    monitor = 1;
    last_sel1 = -1;
    check(t_empty - t0 <= N + 1, $sformatf("drained in %0d periods", t_empty - t0));
    if (mid_stream) check(t_empty - t0 > 1, "disable hit a running ring");
    n_disable++;
    // Keep Disable for a full pixel period from when it was raised.
    while (cycle - t0 < N) @(posedge dclk);
    @(negedge dclk);
    disable_i = 1'b0;
    enable_i  = 1'b1;
    @(posedge dclk);                 // Enable sampled here
    @(negedge dclk);
    enable_i  = 1'b0;
    @(posedge dclk);
    check(sel == '0, "Sel1 not before 1.5 periods");
    @(posedge dclk);
    check(sel == N'(1), "Sel1 1.5 periods after Enable");
    t_sel1 = cycle;
    check(t_sel1 - t0 <= 2 * N, $sformatf("disable+enable took %0d periods", t_sel1 - t0));
    $display("disable raised -> ring empty after %0d, Sel1 again after %0d clock periods",
             t_empty - t0, t_sel1 - t0);
    n_enable++;
  endtask

  initial begin
    disable_i = 1'b1; enable_i = 1'b0; bias = 1'b1; d = '0;
    // 1-2: power-on reset.
    disable_and_enable(1'b0);
    driving = 1;
    // 3-4: stream.
    repeat (60 * N) @(posedge dclk);
    // 5: disable mid-round, re-enable, stream again.
    repeat (3) @(posedge dclk);
    disable_and_enable(1'b1);
    repeat (40 * N) @(posedge dclk);
    // 6: bias off for five rounds, then back on.
    @(negedge dclk);
    bias = 1'b0;
    repeat (5 * N) @(posedge dclk);
    @(negedge dclk);
    bias = 1'b1;
    exp_word.delete();
    repeat (20 * N) @(posedge dclk);

    $display("words=%0d recirculations=%0d hold_used=%0d even_bits=%0d odd_bits=%0d",
             n_words_ok, n_recirc, n_hold, n_even, n_odd);
    $display("enables=%0d disables=%0d standby_bits=%0d", n_enable, n_disable, n_standby);
    check(n_words_ok >= 100, "enough words");
    check(n_recirc > 0, "recirculation happened");
    check(n_hold > 0, "hold flip-flops used");
    check(n_even > 0 && n_odd > 0, "even and odd bits");
    check(n_enable == 2 && n_disable == 2, "enable/disable happened");
    check(n_standby > 0, "bias-off standby happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
