// Testbench of the skip-connection buffer: random writes of signed words,
// then reads checked one cycle later against a model; rdata holds without re.
module tb_skip_buffer;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int C = 256;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 0, re = 0;
  logic [$clog2(C)-1:0] widx = '0, ridx = '0;
  logic signed [31:0] wdata = '0, rdata;
  logic signed [31:0] m [C];

  skip_buffer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < C; c++) begin
      @(negedge clk);
      we = 1; widx = c[7:0]; wdata = $urandom; m[c] = wdata;
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 2000; t++) begin
      logic signed [31:0] e;
      ridx = 8'($urandom);
      e = m[ridx];   // a read in the cycle of a write returns the old word
      if (t % 3 == 0) begin
        we = 1; widx = (t % 6 == 0) ? ridx : 8'($urandom); wdata = $urandom; m[widx] = wdata;
      end
      re = 1;
      @(negedge clk);
      we = 0;
      re = 0;
      checks++;
      if (rdata != e) begin failures++; $display("FAIL idx %0d", ridx); end
      @(negedge clk);
      checks++;
      if (rdata != e) failures++;
      re = 1;
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata != m[ridx]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
