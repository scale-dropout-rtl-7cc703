// Testbench of the SOT-MRAM crossbar model: programs random binary weights,
// applies random input vectors with random row activation and compares every
// column current with m*I_LRS + (n-m)*I_HRS computed from its own copy of
// the weights (m = XNOR matches among the n active inputs). Also checks that
// a read without rd_en leaves the currents unchanged.
module tb_sot_crossbar;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int ROWS = 32, COLS = 16, LR = ROWS / 2;
  localparam real IL = 1000.0 * 0.1 / 1000.0, IH = 1000.0 * 0.1 / 2000.0;

  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic prog_en = 0, rd_en = 0, prog_w = 0;
  logic [$clog2(LR)-1:0]   prog_row = '0;
  logic [$clog2(COLS)-1:0] prog_col = '0;
  logic [LR-1:0] in_bits = '0, in_act = '0;
  real i_col [COLS];
  logic w [LR][COLS];

  sot_crossbar #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < LR; r++)
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = 1'($urandom);
        @(negedge clk);
        prog_en = 1; prog_row = r[$clog2(LR)-1:0]; prog_col = c[$clog2(COLS)-1:0]; prog_w = w[r][c];
      end
    @(negedge clk) prog_en = 0;
    for (int t = 0; t < 50; t++) begin
      in_bits = LR'($urandom);
      in_act  = (t == 0) ? '1 : LR'($urandom);
      rd_en   = 1;
      @(negedge clk) rd_en = 0;
      for (int c = 0; c < COLS; c++) begin
        real e;
        e = 0.0;
        for (int k = 0; k < LR; k++) if (in_act[k]) e += (in_bits[k] == w[k][c]) ? IL : IH;
        checks++;
        if (i_col[c] > e + 1e-9 || i_col[c] < e - 1e-9) begin
          failures++;
          $display("FAIL t=%0d col=%0d got %f exp %f", t, c, i_col[c], e);
        end
      end
      // without rd_en the sampled currents hold
      in_bits = ~in_bits;
      @(negedge clk);
      begin
        real e0;
        e0 = 0.0;
        for (int k = 0; k < LR; k++) if (in_act[k]) e0 += (!in_bits[k] == w[k][0]) ? IL : IH;
        checks++;
        if (i_col[0] > e0 + 1e-9 || i_col[0] < e0 - 1e-9) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
