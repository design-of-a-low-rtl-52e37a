// tb_dc_sel_cell -- self-checking test of the SEL cell.
//
// Random d, load and sel, changed at the rising edge of the clock. A
// reference bit is updated at each falling edge with load high; after every
// change the active-low outputs are checked: q_n low only while sel is high
// and the held bit is 1, nq_n low only while sel is high and the bit is 0.
`timescale 1ps/1ps
module tb_dc_sel_cell;
  localparam int unsigned T = 606;

  logic dclk = 1'b0;
  logic load, d, sel, q_n, nq_n;
  int checks = 0, failures = 0;

  always #(T/2) dclk = ~dclk;

  dc_sel_cell dut (.dclk(dclk), .load(load), .d(d), .sel(sel), .q_n(q_n), .nq_n(nq_n));

  bit ref_bit, known = 0;
  always @(negedge dclk) if (load) begin ref_bit <= d; known <= 1; end

  initial begin : watchdog
    repeat (3000) @(posedge dclk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 1'b1; d = 1'b0; sel = 1'b0;
    @(posedge dclk);
    repeat (2000) begin
      @(posedge dclk);
      load = ($urandom % 3) == 0;
      d    = 1'($urandom);
      sel  = 1'($urandom);
      #(T/4);
      if (known) begin
        checks++;
        if (q_n !== !(sel && ref_bit) || nq_n !== !(sel && !ref_bit)) begin
          failures++;
          $display("FAIL t=%0t sel=%b bit=%b q_n=%b nq_n=%b", $time, sel, ref_bit, q_n, nq_n);
        end
      end
      // Just after the falling edge, outputs reflect a fresh load.
      @(negedge dclk); #1;
      if (known) begin
        checks++;
        if (q_n !== !(sel && ref_bit) || nq_n !== !(sel && !ref_bit)) begin
          failures++;
          $display("FAIL after edge t=%0t sel=%b bit=%b q_n=%b nq_n=%b", $time, sel, ref_bit, q_n, nq_n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
