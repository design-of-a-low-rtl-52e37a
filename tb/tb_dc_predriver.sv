// tb_dc_predriver -- exhaustive test of the wired-AND pre-driver channel.
//
// Applies all 2^5 combinations of the five open-drain inputs and checks the
// output: low whenever any input pulls low, high (pulled up) otherwise.
`timescale 1ps/1ps
module tb_dc_predriver;
  localparam int unsigned F = 5;

  logic [F-1:0] in_n;
  logic         out_n;
  int checks = 0, failures = 0;

  dc_predriver dut (.in_n(in_n), .out_n(out_n));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << F); v++) begin
      bit any_pull;
      in_n = F'(v);
      any_pull = 0;
      for (int b = 0; b < F; b++) if (!in_n[b]) any_pull = 1;
      #10;
      checks++;
      if (out_n !== !any_pull) begin
        failures++;
        $display("FAIL in_n=%b out_n=%b", in_n, out_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
