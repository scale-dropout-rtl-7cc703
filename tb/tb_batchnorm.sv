// Testbench of the batch-norm stage: random Q.16 products and Q16.16
// coefficients; the expected value floor(z*A / 2^16) + B is formed with
// 128-bit integer arithmetic, and checked one cycle later.
module tb_batchnorm;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, en = 0, valid_o;
  logic signed [39:0] z = '0;
  logic signed [31:0] a_coef = '0, b_coef = '0;
  logic signed [72:0] zhat;

  batchnorm dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [127:0] e, prod;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      en = 1;
      z = {$urandom, $urandom} >>> (t % 24);
      z = (t % 3 == 0) ? -z : z;
      a_coef = $signed($urandom) >>> (t % 16);
      b_coef = $urandom;
      prod = 128'(z) * 128'(a_coef);
      // floor division by 2^16
      e = (prod - ((prod % 65536 + 65536) % 65536)) / 65536 + 128'(b_coef);
      @(negedge clk);
      checks += 2;
      if (!valid_o) failures++;
      if (128'(zhat) != e) begin
        failures++;
        $display("FAIL z=%0d a=%0d b=%0d got %0d exp %0d", z, a_coef, b_coef, zhat, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
