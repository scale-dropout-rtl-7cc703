// Testbench of the averaging block: for several T (including the paper's
// T = 10) it adds T random signed logits per class and checks each running
// sum and the final mean sum/T (truncated toward zero) and variance
// (T*sum(y^2) - sum(y)^2) / T^2, computed here in 128-bit arithmetic, then
// that clr empties the sums. One run with equal logits must give variance 0.
module tb_avg_block;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NC = 10;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, clr = 0, acc_en = 0;
  logic [3:0] cls = '0;
  logic signed [31:0] logit = '0;
  logic [7:0] n_runs = '0;
  logic signed [39:0] sum [NC];
  logic signed [31:0] mean [NC];
  logic [63:0] variance [NC];

  avg_block dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int Ts [5] = '{10, 1, 7, 100, 20};
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (Ts[i]) begin
      longint s [NC];
      logic signed [127:0] ss [NC], ev;
      n_runs = 8'(Ts[i]);
      clr = 1;
      @(negedge clk) clr = 0;
      for (int c = 0; c < NC; c++) begin s[c] = 0; ss[c] = 0; end
      for (int r = 0; r < Ts[i]; r++)
        for (int c = 0; c < NC; c++) begin
          acc_en = 1; cls = c[3:0];
          // the last run: class c always gives the same logit
          logit = (i == 4) ? 32'(c * 1000 - 4000) : $signed($urandom) >>> (4 + c % 3 * 8);
          s[c] += longint'(logit);
          ss[c] += 128'(logit) * 128'(logit);
          @(negedge clk);
        end
      acc_en = 0;
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin
        checks += 2;
        if (longint'(sum[c]) != s[c]) failures++;
        if (longint'(mean[c]) != s[c] / Ts[i]) begin
          failures++;
          $display("FAIL T=%0d c=%0d mean %0d exp %0d", Ts[i], c, mean[c], s[c] / Ts[i]);
        end
        ev = (128'(Ts[i]) * ss[c] - 128'(s[c]) * 128'(s[c])) / (128'(Ts[i]) * 128'(Ts[i]));
        checks++;
        if (128'(variance[c]) != ev || (i == 4 && variance[c] != 0)) begin
          failures++;
          $display("FAIL T=%0d c=%0d variance %0d exp %0d", Ts[i], c, variance[c], ev);
        end
      end
    end
    clr = 1;
    @(negedge clk) clr = 0;
    for (int c = 0; c < NC; c++) begin checks++; if (sum[c] != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
