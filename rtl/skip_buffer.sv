// Skip-connection buffer.
//
// For residual topologies the normalised outputs of one layer are kept here
// (one signed 32-bit Q16.16 word per channel, written with we/widx/wdata)
// until a later layer adds them to its own normalised outputs before the sign
// activation. A read (re/ridx) returns the word in rdata on the next rising
// edge. The paper states that skip signals are buffered until the following
// layers finish and then summed in digital logic; the word format and the
// point of addition (after batch norm, before the sign) are this design's.
module skip_buffer #(
  parameter int COLS = 256,
  parameter int W    = 32
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(COLS)-1:0] widx,
  input  logic signed [W-1:0]     wdata,
  input  logic                    re,
  input  logic [$clog2(COLS)-1:0] ridx,
  output logic signed [W-1:0]     rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  logic signed [W-1:0] mem [COLS];

  always_ff @(posedge clk) begin
    if (we) mem[widx] <= wdata;
    if (re) rdata <= mem[ridx];
  end
endmodule
