// Accumulator-adder: sums the partial matrix-vector products of a layer.
//
// For every crossbar column the ADC delivers m, the number of matching
// (XNOR = +1) cells among the n_act inputs applied in this read. The signed
// +-1 dot product of that partial is 2*m - n_act; this block adds it to the
// column's running sum taken from the partial-sum register (acc_in) and
// returns the new sums (acc_out), saturating at the ACC_W-bit signed range.
// With clr high the running sum is ignored, so the first partial of a layer
// starts a new sum. Purely combinational; the partial-sum register stores the
// result. Summing partials follows the paper; the popcount-to-+-1 conversion
// and the saturation are this design's choices.
module acc_adder #(
  parameter int COLS     = 256,
  parameter int ADC_BITS = 8,
  parameter int ACC_W    = 8
) (
  input  logic                    clr,
  input  logic [8:0]              n_act,
  input  logic [ADC_BITS-1:0]     code   [COLS],
  input  logic signed [ACC_W-1:0] acc_in [COLS],
  output logic signed [ACC_W-1:0] acc_out[COLS]
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int SUM_W = (ACC_W > ADC_BITS + 2 ? ACC_W : ADC_BITS + 2) + 2;
  localparam logic signed [SUM_W-1:0] MAXV = SUM_W'((1 <<< (ACC_W - 1)) - 1);
  localparam logic signed [SUM_W-1:0] MINV = -SUM_W'(1 <<< (ACC_W - 1));

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [SUM_W-1:0] part, sum;
      part = (SUM_W'(code[c]) <<< 1) - SUM_W'(n_act);
      sum  = clr ? part : part + SUM_W'(acc_in[c]);
      if (sum > MAXV)      acc_out[c] = MAXV[ACC_W-1:0];
      else if (sum < MINV) acc_out[c] = MINV[ACC_W-1:0];
      else                 acc_out[c] = sum[ACC_W-1:0];
    end
  end

endmodule
