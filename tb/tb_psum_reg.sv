// Testbench of the partial-sum register: loads random column vectors, checks
// the parallel output, the one-cycle serial read of a chosen column, that a
// cycle without we keeps the contents, and the reset value.
module tb_psum_reg;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int COLS = 16, AW = 8;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, we = 0, rd_en = 0;
  logic signed [AW-1:0] d [COLS];
  logic signed [AW-1:0] q [COLS];
  logic [$clog2(COLS)-1:0] rd_col = '0;
  logic signed [AW-1:0] rd_q;
  logic signed [AW-1:0] model [COLS];

  psum_reg #(.COLS(COLS), .ACC_W(AW)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < COLS; c++) d[c] = '0;
    @(negedge clk);
    for (int c = 0; c < COLS; c++) begin checks++; if (q[c] != 0) failures++; end
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      we = (t == 0) ? 1'b1 : 1'($urandom);
      for (int c = 0; c < COLS; c++) d[c] = AW'($urandom);
      if (we) for (int c = 0; c < COLS; c++) model[c] = d[c];
      rd_en = 0;
      @(negedge clk);
      we = 0;
      for (int c = 0; c < COLS; c++) begin checks++; if (q[c] != model[c]) failures++; end
      rd_col = $clog2(COLS)'($urandom);
      rd_en = 1;
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_q != model[rd_col]) begin failures++; $display("FAIL read col %0d", rd_col); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
