// Testbench of the accumulator-adder: random ADC codes, active-input counts
// and running sums; the expected result 2*m - n (+ running sum unless clr),
// saturated to the signed 8-bit range, is computed with integers.
module tb_acc_adder;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int COLS = 8, AB = 8, AW = 8;
  int checks = 0, failures = 0;

  logic clr;
  logic [8:0] n_act;
  logic [AB-1:0] code [COLS];
  logic signed [AW-1:0] acc_in [COLS];
  logic signed [AW-1:0] acc_out [COLS];
  int sat_hi = 0, sat_lo = 0;

  acc_adder #(.COLS(COLS), .ADC_BITS(AB), .ACC_W(AW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int n;
      n = 1 + int'($urandom % 128);
      n_act = 9'(n);
      clr = 1'($urandom);
      for (int c = 0; c < COLS; c++) begin
        code[c]   = AB'($urandom % (n + 1));
        acc_in[c] = AW'($urandom);
      end
      #1;
      for (int c = 0; c < COLS; c++) begin
        int e;
        e = 2 * int'(code[c]) - n + (clr ? 0 : int'(acc_in[c]));
        if (e > 127) begin e = 127; sat_hi++; end
        if (e < -128) begin e = -128; sat_lo++; end
        checks++;
        if (int'(acc_out[c]) != e) begin
          failures++;
          $display("FAIL n=%0d code=%0d in=%0d clr=%0d got %0d exp %0d", n, code[c], acc_in[c], clr, acc_out[c], e);
        end
      end
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
