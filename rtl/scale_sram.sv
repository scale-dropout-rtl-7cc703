// Scale memory: the SRAM that holds the learned scale vectors.
//
// One row per network layer, one WIDTH-bit word per output channel (column),
// so row l is the scale vector alpha of layer l. A write stores one word
// (row/column addressed, synchronous). A read selects the row (row decoder)
// and the word (column decoder) and the sensed word is loaded into the output
// register rdata on the next rising edge: one-cycle read latency. The same
// module, with a wider word, also stores the folded batch-norm coefficients.
// The 32-bit word and the row-per-layer organisation follow the paper; the
// column count (crossbar width) and the read timing are this design's
// choices, and the SRAM macro is modelled as a register array.
module scale_sram #(
  parameter int WIDTH = 32,
  parameter int ROWS  = 5,
  parameter int COLS  = 256
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(ROWS)-1:0]   waddr_row,
  input  logic [$clog2(COLS)-1:0]   waddr_col,
  input  logic [WIDTH-1:0]          wdata,
  input  logic                      re,
  input  logic [$clog2(ROWS)-1:0]   raddr_row,
  input  logic [$clog2(COLS)-1:0]   raddr_col,
  output logic [WIDTH-1:0]          rdata
);
  timeunit 1ns;
  timeprecision 1ps;

  logic [WIDTH-1:0] mem [ROWS*COLS];

  always_ff @(posedge clk) begin
    if (we) mem[int'(waddr_row) * COLS + int'(waddr_col)] <= wdata;
    if (re) rdata <= mem[int'(raddr_row) * COLS + int'(raddr_col)];
  end
endmodule
