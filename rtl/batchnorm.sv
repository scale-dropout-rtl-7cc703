// BatchNorm: per-channel affine normalisation of the scaled sum.
//
// Inference-time batch normalisation gamma*(z-mu)/sigma + beta is folded
// offline into two per-channel Q16.16 coefficients, A = gamma/sigma and
// B = beta - A*mu, so zhat = A*z + B. z is the Q.16 product of the
// multiplier; A*z is Q.32, shifted back to Q.16 (arithmetic shift, rounding
// toward minus infinity) before B is added. The result is registered: zhat is
// valid one cycle after z when en was high. Batch normalisation after the
// scaling is the paper's; the folding, formats and timing are this design's.
module batchnorm #(
  parameter int IN_W = 40,
  parameter int C_W  = 32,
  parameter int FRAC = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          en,
  input  logic signed [IN_W-1:0]        z,
  input  logic signed [C_W-1:0]         a_coef,
  input  logic signed [C_W-1:0]         b_coef,
  output logic signed [IN_W+C_W:0]      zhat,
  output logic                          valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int PW = IN_W + C_W;
  logic signed [PW-1:0] prod;
  assign prod = PW'(z) * PW'(a_coef);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      zhat    <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= en;
      if (en) zhat <= (PW+1)'(prod >>> FRAC) + (PW+1)'(b_coef);
    end
  end
endmodule
