// tb_dc_driver -- exhaustive test of the output driver model.
//
// All 16 combinations of the four active-low gate inputs, with and without
// bias. A pin must sink (logic 0, 2.8019 V) exactly when the bias is on and
// one of its two gates is low, and otherwise be released (logic 1,
// 3.299 V). Also checks that the single-ended swing between the two levels
// (0.497 V) lies inside the 0.4 V .. 0.6 V window of the HDMI specification.
`timescale 1ps/1ps
module tb_dc_driver;
  logic pe, po, pne, pno, csc, tx_p, tx_n;
  dc_pkg::volt_t vp, vn;
  int checks = 0, failures = 0;

  dc_driver dut (.pmos_even(pe), .pmos_odd(po), .pmos_neven(pne), .pmos_nodd(pno),
                 .csc(csc), .tx_p(tx_p), .tx_n(tx_n), .vtx_p(vp), .vtx_n(vn));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 32; v++) begin
      bit sink_p, sink_n;
      {csc, pe, po, pne, pno} = 5'(v);
      sink_p = csc && (!pe || !po);
      sink_n = csc && (!pne || !pno);
      #10;
      checks++;
      if (tx_p !== !sink_p || tx_n !== !sink_n) begin
        failures++;
        $display("FAIL csc=%b gates=%b%b%b%b tx_p=%b tx_n=%b", csc, pe, po, pne, pno, tx_p, tx_n);
      end
      checks++;
      if ((sink_p ? 16'd28019 : 16'd32990) != vp || (sink_n ? 16'd28019 : 16'd32990) != vn) begin
        failures++;
        $display("FAIL voltages vp=%0d vn=%0d", vp, vn);
      end
    end
    // Swing between the two levels lies within 0.4 V .. 0.6 V.
    {csc, pe, po, pne, pno} = 5'b1_0111;
    #10;
    checks++;
    if (!((vn - vp) >= 16'd4000 && (vn - vp) <= 16'd6000)) begin
      failures++;
      $display("FAIL swing %0d x 0.1 mV", vn - vp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
