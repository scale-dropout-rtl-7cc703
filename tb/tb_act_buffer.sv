// Testbench of the activation buffer: loads a random input vector through
// the 32-bit load port, writes random bits into both ping-pong banks, and
// checks every bank read against a model, including that datapath writes
// never touch the input bank, that OR-writes (used for max-pooling) merge
// with the stored bit, and that a clear empties one ping-pong bank.
module tb_act_buffer;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int N = 300;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, ld_en = 0, wr_en = 0, wr_bit = 0, wr_or = 0, clr_en = 0;
  logic [1:0] clr_bank = '0;
  logic [$clog2((N+31)/32)-1:0] ld_addr = '0;
  logic [31:0] ld_data = '0;
  logic [1:0] wr_bank = '0, rd_bank = '0;
  logic [$clog2(N)-1:0] wr_idx = '0;
  logic [N-1:0] rd_vec;
  logic [N-1:0] m [3];

  act_buffer #(.MAX_IN(N)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [((N+31)/32)*32-1:0] inw;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) m[b] = '0;
    for (int w = 0; w < (N + 31) / 32; w++) begin
      ld_en = 1; ld_addr = w[$clog2((N+31)/32)-1:0]; ld_data = $urandom;
      inw[32*w +: 32] = ld_data;
      @(negedge clk);
    end
    ld_en = 0;
    m[0] = inw[N-1:0];
    for (int t = 0; t < 5000; t++) begin
      wr_en   = 1;
      wr_bank = 2'($urandom % 3);
      wr_idx  = $clog2(N)'($urandom % N);
      wr_bit  = 1'($urandom);
      wr_or   = 1'($urandom);
      if (wr_bank != 0) m[wr_bank][wr_idx] = wr_bit | (wr_or & m[wr_bank][wr_idx]);
      @(negedge clk);
      wr_en = 0;
      if ($urandom % 50 == 0) begin
        clr_en = 1; clr_bank = 2'(1 + $urandom % 2);
        m[clr_bank] = '0;
        @(negedge clk);
        clr_en = 0;
      end
      rd_bank = 2'($urandom % 3);
      #0.1;
      checks++;
      if (rd_vec != m[rd_bank]) begin failures++; $display("FAIL bank %0d", rd_bank); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
