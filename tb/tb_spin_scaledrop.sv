// Testbench of the Spin-ScaleDrop MTJ model: repeated 10 ns SET / 5 ns RESET
// cycles at several probability codes; the fraction of switched reads must
// lie within a binomial tolerance of the code / 256. Also checks that a RESET
// always returns the MTJ to the parallel state, that a too-short RESET does
// not, that a short SET switches less often, and that sa_out is 0 while the
// sense amplifier is disabled. A second device with Gaussian variation
// (mean +0.1, spread 0.05) must switch at the shifted rate.
module tb_spin_scaledrop;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic set_i = 0, reset_i = 0, sa_en = 0;
  logic [7:0] p_keep = '0;
  logic sa_out;

  spin_scaledrop dut (.*);
  // a device with variation: mean shift +0.1, spread 0.05
  logic sa_out2;
  spin_scaledrop #(.P_OFFSET(0.1), .P_SIGMA(0.05)) dut2 (.set_i, .reset_i, .p_keep, .sa_en, .sa_out (sa_out2));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_set(real w);
    set_i = 1; #(w); set_i = 0; #1;
  endtask
  task automatic pulse_reset(real w);
    reset_i = 1; #(w); reset_i = 0; #1;
  endtask

  function automatic bit in_tol(int k, int n, real p);
    real sd;
    sd = $sqrt(real'(n) * p * (1.0 - p)) + 1.0;
    return (real'(k) > real'(n) * p - 5.0 * sd) && (real'(k) < real'(n) * p + 5.0 * sd);
  endfunction

  initial begin
    int codes [4] = '{0, 26, 128, 230};
    foreach (codes[i]) begin
      int k, k2;
      k = 0; k2 = 0;
      p_keep = 8'(codes[i]);
      for (int n = 0; n < 2000; n++) begin
        pulse_set(10.0);
        checks++;
        if (sa_out !== 1'b0) failures++;        // SA disabled
        sa_en = 1; #1;
        k += int'(sa_out);
        k2 += int'(sa_out2);
        sa_en = 0;
        pulse_reset(5.0);
        sa_en = 1; #1;
        checks++;
        if (sa_out) failures++;                  // RESET restored P state
        sa_en = 0;
      end
      checks++;
      if (!in_tol(k, 2000, real'(codes[i]) / 256.0)) begin
        failures++;
        $display("FAIL code %0d: %0d of 2000 switched", codes[i], k);
      end
      // the varied device switches at p + 0.1 on average (codes far from 1)
      if (codes[i] < 200) begin
        checks++;
        if (!in_tol(k2, 2000, real'(codes[i]) / 256.0 + 0.1)) begin
          failures++;
          $display("FAIL varied device, code %0d: %0d of 2000 switched", codes[i], k2);
        end
      end
    end
    // a 3 ns SET switches with 1-(1-p)^0.3 < p
    begin
      int k;
      k = 0;
      p_keep = 8'd128;
      for (int n = 0; n < 2000; n++) begin
        pulse_set(3.0);
        sa_en = 1; #1; k += int'(sa_out); sa_en = 0;
        pulse_reset(5.0);
      end
      checks++;
      if (!in_tol(k, 2000, 1.0 - $pow(0.5, 0.3))) begin failures++; $display("FAIL short SET %0d", k); end
    end
    // a 2 ns RESET does not restore the state
    p_keep = 8'd255;
    do begin pulse_set(10.0); sa_en = 1; #1; sa_en = 0; end while (!dut.ap);
    pulse_reset(2.0);
    sa_en = 1; #1;
    checks++;
    if (!sa_out) failures++;
    sa_en = 0;
    pulse_reset(5.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
