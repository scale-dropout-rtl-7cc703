// Sign activation / comparator.
//
// Compares the normalised value with zero: act = 1 (+1) when zhat >= 0,
// act = 0 (-1) otherwise; this bit is the next layer's binary input. For the
// output layer the same value is also delivered as a 32-bit Q16.16 logit,
// saturated to the 32-bit range. Combinational. The sign activation is the
// paper's (ties to +1 as in its binarisation rule); the logit output and its
// saturation are this design's.
module sign_act #(
  parameter int IN_W    = 73,
  parameter int LOGIT_W = 32
) (
  input  logic signed [IN_W-1:0]    zhat,
  input  logic signed [IN_W-1:0]    skip_in,
  input  logic                      add_skip,
  output logic                      act,
  output logic signed [LOGIT_W-1:0] logit
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam logic signed [IN_W:0] LMAX = (IN_W+1)'(((IN_W+1)'(1) <<< (LOGIT_W-1)) - 1);
  localparam logic signed [IN_W:0] LMIN = -(IN_W+1)'((IN_W+1)'(1) <<< (LOGIT_W-1));

  logic signed [IN_W:0] v;
  assign v   = (IN_W+1)'(zhat) + (add_skip ? (IN_W+1)'(skip_in) : '0);
  assign act = (v >= 0);
  always_comb begin
    if (v > LMAX)      logit = LMAX[LOGIT_W-1:0];
    else if (v < LMIN) logit = LMIN[LOGIT_W-1:0];
    else               logit = v[LOGIT_W-1:0];
  end
endmodule
