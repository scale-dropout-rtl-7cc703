// Multiplier: scales one weighted sum by its (possibly dropped) scale.
//
// Signed ACC_W-bit weighted sum times signed SCALE_W-bit Q16.16 scale gives a
// signed (ACC_W+SCALE_W)-bit product in Q.16; the product is registered, so p
// is valid one cycle after a/b when en was high (valid_o marks it). One
// multiplier serves all channels of all layers in turn. The multiplication of
// the weighted sum by the scale vector is the paper's; widths of the operands
// are those of the diagram, the register stage is this design's.
module scale_multiplier #(
  parameter int ACC_W   = 8,
  parameter int SCALE_W = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              en,
  input  logic signed [ACC_W-1:0]           a,
  input  logic signed [SCALE_W-1:0]         b,
  output logic signed [ACC_W+SCALE_W-1:0]   p,
  output logic                              valid_o
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p       <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= en;
      if (en) p <= (ACC_W+SCALE_W)'(a) * (ACC_W+SCALE_W)'(b);
    end
  end
endmodule
