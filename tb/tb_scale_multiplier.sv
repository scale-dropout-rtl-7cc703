// Testbench of the multiplier: random signed 8-bit sums and 32-bit scales,
// the registered product must equal the 64-bit integer product one cycle
// later, with valid_o following en; p holds while en is low.
module tb_scale_multiplier;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, en = 0, valid_o;
  logic signed [7:0]  a = '0;
  logic signed [31:0] b = '0;
  logic signed [39:0] p;

  scale_multiplier dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    repeat (2) @(negedge clk);
    rst_n = 1;
    e = 0;
    for (int t = 0; t < 2000; t++) begin
      en = 1'($urandom);
      a  = (t == 1) ? -8'sd128 : 8'($urandom);
      b  = (t == 1) ? 32'sh8000_0000 : $urandom;
      if (en) e = longint'(a) * longint'(b);
      @(negedge clk);
      checks += 2;
      if (valid_o != en) failures++;
      if (t > 0 && longint'(p) != e) begin
        failures++;
        $display("FAIL %0d * %0d = %0d, got %0d", a, b, e, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
