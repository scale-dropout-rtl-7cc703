// Scale multiplexer: applies Unitary Scale-Dropout to one scale element.
//
// d is the layer's dropout mask bit from the Spin-ScaleDrop module. With
// d = 1 the stored scale passes; with d = 0 the scale is replaced by the
// fixed-point constant one, so the weighted sum goes through unscaled (the
// paper drops a scale to one, not to zero, so no information is lost).
// Combinational. The diagram prints "0" on the d = 0 input; the prose says the
// dropped scale is set to one, and the prose is followed here.
module scale_mux
  import sd_pkg::*;
#(
  parameter int SW = 32
) (
  input  logic               d,
  input  logic [SW-1:0] scale,
  output logic [SW-1:0] scale_eff
);
  timeunit 1ns;
  timeprecision 1ps;

  assign scale_eff = d ? scale : SW'(SCALE_ONE);
endmodule
