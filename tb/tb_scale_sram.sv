// Testbench of the scale memory: fills every (layer, channel) word with a
// random value, then reads random addresses and checks the data one cycle
// after the read, and that the output register holds while re is low.
module tb_scale_sram;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int W = 32, R = 5, C = 256;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0, re = 0;
  logic [$clog2(R)-1:0] waddr_row = '0, raddr_row = '0;
  logic [$clog2(C)-1:0] waddr_col = '0, raddr_col = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [R][C];

  scale_sram #(.WIDTH(W), .ROWS(R), .COLS(C)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < R; r++)
      for (int c = 0; c < C; c++) begin
        @(negedge clk);
        we = 1; waddr_row = r[$clog2(R)-1:0]; waddr_col = c[$clog2(C)-1:0];
        wdata = $urandom; model[r][c] = wdata;
      end
    @(negedge clk) we = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [W-1:0] e;
      raddr_row = $clog2(R)'($urandom % R);
      raddr_col = $clog2(C)'($urandom);
      e = model[raddr_row][raddr_col];
      re = 1;
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata != e) begin failures++; $display("FAIL %0d,%0d", raddr_row, raddr_col); end
      raddr_col = raddr_col + 1'b1;
      @(negedge clk);
      checks++;
      if (rdata != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
