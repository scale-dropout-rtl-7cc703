// Testbench of the Spin-ScaleDrop pulse sequencer. A random sense-amplifier
// value is offered only during the sense cycle; the testbench checks the SET
// pulse length (10 cycles), the RESET length (5 cycles), the single sense
// cycle inside RESET, the 15-cycle request-to-done latency, that d equals the
// sensed value and holds, and that p_o carries the requested probability.
module tb_scaledrop_seq;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, req = 0, sa_i;
  logic [7:0] p_keep = '0, p_o;
  logic set_o, reset_o, sa_en_o, busy, done, d;
  logic sa_val;

  scaledrop_seq dut (.*);

  assign sa_i = sa_en_o ? sa_val : 1'b0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sa_val = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int nset, nrst, nsense, lat;
      logic exp_d;
      sa_val = 1'($urandom);
      exp_d  = sa_val;
      p_keep = 8'($urandom);
      @(negedge clk);
      req = 1;
      @(negedge clk);
      req = 0;
      nset = 0; nrst = 0; nsense = 0; lat = 0;
      while (!done && lat < 100) begin
        nset   += int'(set_o);
        nrst   += int'(reset_o);
        nsense += int'(sa_en_o);
        checks++;
        if (set_o && reset_o) failures++;
        if (sa_en_o && !reset_o) failures++;
        if (p_o != p_keep) failures++;
        @(negedge clk);
        lat++;
      end
      checks += 5;
      if (nset != 10)  begin failures++; $display("FAIL SET %0d cycles", nset); end
      if (nrst != 5)   begin failures++; $display("FAIL RESET %0d cycles", nrst); end
      if (nsense != 1) failures++;
      if (lat != 15)   begin failures++; $display("FAIL latency %0d", lat); end
      if (d != exp_d)  failures++;
      sa_val = !sa_val;
      repeat (3) @(negedge clk);
      checks++;
      if (d != exp_d || busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
