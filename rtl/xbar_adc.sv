// Behavioural model (not synthesizable logic: an analog-to-digital converter
// bank).
//
// One ADC per crossbar source line. Each converts a column current into the
// number of matching (LRS) cells among the n_act active inputs:
//   code = round((I - n_act*I_HRS) / (I_LRS - I_HRS)), clamped to 0..2^ADC_BITS-1.
// The reference (offset) therefore follows the number of driven rows. All
// columns convert in parallel; a pulse on conv yields the codes and a one-cycle
// valid pulse on the next rising edge. The paper says only that multi-bit ADCs
// replace the single-bit sense amplifiers; resolution, offset handling and
// timing are this model's choices (8 bits cover the 0..128 range of a
// 256-row array).
module xbar_adc #(
  parameter int  COLS       = 256,
  parameter int  ADC_BITS   = 8,
  parameter real R_LRS_KOHM = 1000.0,
  parameter real R_HRS_KOHM = 2000.0,
  parameter real V_READ     = 0.1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                conv,
  input  logic [8:0]          n_act,
  input  real                 i_col [COLS],
  output logic [ADC_BITS-1:0] code  [COLS],
  output logic                valid
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam real I_L = 1000.0 * V_READ / R_LRS_KOHM;
  localparam real I_H = 1000.0 * V_READ / R_HRS_KOHM;
  localparam int  CMAX = (1 << ADC_BITS) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      for (int c = 0; c < COLS; c++) code[c] <= '0;
    end else begin
      valid <= conv;
      if (conv) begin
        for (int c = 0; c < COLS; c++) begin
          real x;
          int  q;
          x = (i_col[c] - real'(n_act) * I_H) / (I_L - I_H);
          q = $rtoi(x + 0.5);
          if (x < 0.0) q = 0;
          if (q > CMAX) q = CMAX;
          code[c] <= ADC_BITS'(q);
        end
      end
    end
  end

endmodule
