// Partial-sum register: the register under the accumulator-adder.
//
// Holds one signed ACC_W-bit weighted sum per crossbar column. With we high
// all COLS sums are loaded at the rising edge (from the accumulator-adder);
// q shows them all so the adder can add the next partial. The scaling path
// reads one column per cycle: rd_col selects it, rd_en loads it into the
// output register rd_q on the next rising edge (one-cycle read latency).
// Cleared by the active-low asynchronous reset. The register and its 8-bit
// width follow the architecture diagram; the serial read-out is this design's
// reading of the single 8-bit path drawn into the multiplier.
module psum_reg #(
  parameter int COLS  = 256,
  parameter int ACC_W = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic signed [ACC_W-1:0]   d  [COLS],
  output logic signed [ACC_W-1:0]   q  [COLS],
  input  logic                      rd_en,
  input  logic [$clog2(COLS)-1:0]   rd_col,
  output logic signed [ACC_W-1:0]   rd_q
);
  timeunit 1ns;
  timeprecision 1ps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) q[c] <= '0;
      rd_q <= '0;
    end else begin
      if (we) for (int c = 0; c < COLS; c++) q[c] <= d[c];
      if (rd_en) rd_q <= q[rd_col];
    end
  end
endmodule
