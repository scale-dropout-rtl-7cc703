// Testbench of the sign comparator: random normalised values (with and
// without an added skip value) must give act = (v >= 0), and the logit must
// equal v clipped to the signed 32-bit range. Zero must map to +1.
module tb_sign_act;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic signed [72:0] zhat, skip_in;
  logic add_skip, act;
  logic signed [31:0] logit;
  int nsat = 0;

  sign_act dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic signed [127:0] v, l;
      zhat     = (t == 0) ? '0 : 73'($signed({$urandom, $urandom, $urandom})) >>> (t % 60);
      skip_in  = 73'($signed($urandom));
      add_skip = (t == 0) ? 1'b0 : 1'($urandom);
      v = 128'(zhat) + (add_skip ? 128'(skip_in) : 128'sd0);
      l = v;
      if (v > 128'sd2147483647) begin l = 128'sd2147483647; nsat++; end
      if (v < -128'sd2147483648) begin l = -128'sd2147483648; nsat++; end
      #1;
      checks += 2;
      if (act != (v >= 0)) begin failures++; $display("FAIL sign of %0d", v); end
      if (128'(logit) != l) begin failures++; $display("FAIL logit of %0d: %0d", v, logit); end
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
