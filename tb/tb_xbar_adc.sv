// Testbench of the ADC bank: drives column currents built from random match
// counts (plus a small error below half an LSB), and checks that each code
// equals the match count, that codes clamp at 0 and at full scale, and that
// valid follows conv by one cycle.
module tb_xbar_adc;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int COLS = 16, AB = 8;
  localparam real IL = 0.1, IH = 0.05;

  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, conv = 0, valid;
  logic [8:0] n_act = '0;
  real i_col [COLS];
  logic [AB-1:0] code [COLS];
  int exp_m [COLS];

  xbar_adc #(.COLS(COLS), .ADC_BITS(AB)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < COLS; c++) i_col[c] = 0.0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int n;
      n = (t < 50) ? 128 : int'($urandom % 300);
      n_act = 9'(n);
      for (int c = 0; c < COLS; c++) begin
        real err;
        exp_m[c] = (n == 0) ? 0 : int'($urandom % (n + 1));
        err = (real'($urandom % 800) - 400.0) / 1000.0 * (IL - IH);
        i_col[c] = real'(exp_m[c]) * IL + real'(n - exp_m[c]) * IH + err;
        if (c == 0 && t % 7 == 0) begin
          i_col[c] = real'(n) * IH - 5.0 * IL;   // below the offset: clamps to 0
          exp_m[c] = 0;
        end
        if (exp_m[c] > 255) exp_m[c] = 255;
      end
      conv = 1;
      @(negedge clk) conv = 0;
      checks++;
      if (!valid) failures++;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (int'(code[c]) != exp_m[c]) begin
          failures++;
          $display("FAIL t=%0d c=%0d code %0d exp %0d", t, c, code[c], exp_m[c]);
        end
      end
      @(negedge clk);
      checks++;
      if (valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
