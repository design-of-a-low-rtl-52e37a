// tb_dc_hold_ff -- self-checking test of the D8/D9 hold flip-flops.
//
// Random data and load, changed at the rising edge; a reference register
// updated at falling edges with load high is compared with q every period.
// Also checks that q does not follow d while load is low.
`timescale 1ps/1ps
module tb_dc_hold_ff;
  localparam int unsigned T = 606;
  localparam int unsigned W = 2;

  logic dclk = 1'b0;
  logic load;
  logic [W-1:0] d, q;
  int checks = 0, failures = 0, holds = 0;

  always #(T/2) dclk = ~dclk;

  dc_hold_ff dut (.dclk(dclk), .load(load), .d(d), .q(q));

  logic [W-1:0] ref_q;
  bit known = 0;
  always @(negedge dclk) if (load) begin ref_q <= d; known <= 1; end

  initial begin : watchdog
    repeat (3000) @(posedge dclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 1'b1; d = '0;
    @(posedge dclk);
    repeat (2000) begin
      @(posedge dclk);
      load = ($urandom % 4) == 0;
      d    = W'($urandom);
      #(T/4);
      if (known) begin
        checks++;
        if (q !== ref_q) begin
          failures++;
          $display("FAIL t=%0t q=%b exp=%b", $time, q, ref_q);
        end
        if (!load && d != ref_q) holds++;
      end
    end
    checks++;
    if (holds == 0) begin failures++; $display("FAIL no hold case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
