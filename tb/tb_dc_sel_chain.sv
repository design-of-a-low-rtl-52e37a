// tb_dc_sel_chain -- self-checking test of the bit-select ring.
//
// Drives Start from the testbench: first single pulses and random patterns,
// compared cycle by cycle with a shift-register model kept in the
// testbench; then Start fed back from Sel10, as the reset circuit does,
// where it checks that exactly one Selk is high in every period and that
// the token returns to Sel1 every 10 periods (the ring's round time).
// Inputs change at the rising edge, outputs are checked at the rising edge
// (half a period after the falling edge on which the ring moves).
`timescale 1ps/1ps
module tb_dc_sel_chain;
  localparam int unsigned N = 10;
  localparam int unsigned T = 606;

  logic         dclk = 1'b0;
  logic         start;
  logic [N-1:0] sel;
  logic         isel1;
  logic         feedback;
  int checks = 0, failures = 0;

  always #(T/2) dclk = ~dclk;

  dc_sel_chain dut (.dclk(dclk), .start(start), .sel(sel), .isel1(isel1));

  logic         start_drv;
  assign start = feedback ? sel[N-1] : start_drv;

  logic [N-1:0] model;
  logic         model_i;
  always @(negedge dclk) begin
    model   <= {model[N-2:0], start};
    model_i <= start;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0t %s sel=%b model=%b isel1=%b", $time, what, sel, model, isel1);
    end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge dclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int last_sel1, period;
  initial begin
    feedback = 1'b0;
    start_drv = 1'b0;
    // Flush: Start low for N periods empties the chain whatever it held.
    repeat (N + 1) @(posedge dclk);
    check(sel == '0, "flush");
    model = '0; model_i = 1'b0;
    // Single pulse walks through Sel1..Sel10, one per period.
    start_drv = 1'b1;
    @(posedge dclk);
    start_drv = 1'b0;
    for (int k = 0; k < N; k++) begin
      if (k > 0) @(posedge dclk);
      #1;
      check(sel == (N'(1) << k), $sformatf("pulse at Sel%0d", k + 1));
      check(isel1 == (k == 0), "isel1 image of Sel1");
    end
    @(posedge dclk);
    check(sel == '0, "pulse gone");
    // Random Start pattern against the model.
    repeat (200) begin
      start_drv = 1'($urandom);
      @(posedge dclk);
      check(sel == model, "random");
      check(isel1 == model_i && isel1 == sel[0], "random isel1");
    end
    // Recirculation: one token, Start = Sel10.
    start_drv = 1'b0;
    repeat (N + 1) @(posedge dclk);
    start_drv = 1'b1;
    @(posedge dclk);
    start_drv = 1'b0;
    feedback = 1'b1;
    last_sel1 = -1;
    for (int c = 0; c < 100; c++) begin
      @(posedge dclk);
      check($onehot(sel), "one token");
      if (sel[0]) begin
        if (last_sel1 >= 0) begin
          period = c - last_sel1;
          check(period == N, $sformatf("round time %0d", period));
        end
        last_sel1 = c;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
