// Testbench of the scale multiplexer: with the mask at 1 the stored scale
// must pass, with the mask at 0 the output must be 1.0 in Q16.16 whatever the
// stored scale.
module tb_scale_mux;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic d;
  logic [31:0] scale, scale_eff;

  scale_mux dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      d = 1'($urandom);
      scale = (t == 0) ? 32'h0001_0000 : $urandom;
      #1;
      checks++;
      if (scale_eff != (d ? scale : 32'h0001_0000)) begin
        failures++;
        $display("FAIL d=%0d scale=%h out=%h", d, scale, scale_eff);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
