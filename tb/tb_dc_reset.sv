// tb_dc_reset -- self-checking test of the Start generator.
//
// Drives Disable, Enable and Buffered_Sel10 with directed and random values
// (changed at the falling edge, so they are stable at the rising edge where
// the block samples them) and checks Start half a period after every edge
// against a reference built from the stated rules: Start goes high at the
// falling edge after a rising edge that saw Enable=1, Disable=0 and stays
// high one period; otherwise Start follows Sel10 while the sampled Disable
// and Enable are both low.
`timescale 1ps/1ps
module tb_dc_reset;
  localparam int unsigned T = 606;

  logic dclk = 1'b0;
  logic disable_i, enable_i, sel10, start;
  int checks = 0, failures = 0;

  always #(T/2) dclk = ~dclk;

  dc_reset dut (.dclk(dclk), .disable_i(disable_i), .enable_i(enable_i),
                .sel10(sel10), .start(start));

  // Reference: values seen at the last rising edge, and the kick decided at
  // the last falling edge.
  bit ref_dis, ref_en, ref_kick, primed = 0;
  always @(posedge dclk) begin
    ref_dis <= disable_i;
    ref_en  <= enable_i;
  end
  always @(negedge dclk) begin
    ref_kick <= ref_en && !ref_dis;
    primed   <= 1;
  end

  int kicks = 0, recirc = 0, blocked = 0;
  task automatic check_start();
    bit exp;
    exp = ref_kick || (!ref_dis && !ref_en && sel10);
    checks++;
    if (start !== exp) begin
      failures++;
      $display("FAIL t=%0t start=%b exp=%b dis=%b en=%b sel10=%b", $time, start, exp,
               ref_dis, ref_en, sel10);
    end
    if (ref_kick) kicks++;
    if (!ref_kick && exp) recirc++;
    if (ref_dis && sel10) blocked++;
  endtask

  initial begin : watchdog
    repeat (3000) @(posedge dclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit prev_en;
  initial begin
    disable_i = 1'b1; enable_i = 1'b0; sel10 = 1'b0;
    repeat (3) @(negedge dclk);
    // Directed: an Enable pulse gives one period of Start beginning at the
    // falling edge after the rising edge that saw it.
    disable_i = 1'b0;
    @(negedge dclk);
    enable_i = 1'b1;
    @(posedge dclk);          // sampled here
    #(T/4);
    checks++; if (start !== 1'b0) begin failures++; $display("FAIL early start"); end
    @(negedge dclk);
    enable_i = 1'b0;
    #(T/4);
    checks++; if (start !== 1'b1) begin failures++; $display("FAIL no kick"); end
    @(posedge dclk); #(T/4);
    checks++; if (start !== 1'b1) begin failures++; $display("FAIL kick too short"); end
    @(negedge dclk); #(T/4);
    checks++; if (start !== 1'b0) begin failures++; $display("FAIL kick too long"); end
    // Directed: Disable blocks Enable.
    disable_i = 1'b1;
    @(negedge dclk);
    enable_i = 1'b1;
    @(negedge dclk);
    enable_i = 1'b0;
    repeat (2) begin
      #(T/4);
      checks++; if (start !== 1'b0) begin failures++; $display("FAIL kick while disabled"); end
      @(negedge dclk);
    end
    // Random stimulus; Enable is never high two rising edges in a row.
    prev_en = 0;
    repeat (1500) begin
      @(negedge dclk);
      disable_i = ($urandom % 4) == 0;
      enable_i  = !prev_en && (($urandom % 5) == 0);
      prev_en   = enable_i;
      sel10     = 1'($urandom);
      #(T/4);  check_start();
      @(posedge dclk); #(T/4); check_start();
    end
    checks++;
    if (kicks == 0 || recirc == 0 || blocked == 0) begin
      failures++;
      $display("FAIL coverage kicks=%0d recirc=%0d blocked=%0d", kicks, recirc, blocked);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
