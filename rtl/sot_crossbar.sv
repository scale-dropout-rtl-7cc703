// Behavioural model (not synthesizable logic: an analog SOT-MRAM array).
//
// Binary-weight SOT-MRAM crossbar used for in-memory XNOR / popcount. Each
// logical weight occupies two physical cells in the same column (a
// complementary pair on rows 2k and 2k+1): weight +1 is stored as (LRS, HRS),
// weight -1 as (HRS, LRS). An input +1 drives the read word line of row 2k,
// an input -1 that of row 2k+1, so the conducting cell is LRS exactly when
// input and weight agree (XNOR = +1) and HRS otherwise. Each source line
// therefore carries I = V_READ * (m/R_LRS + (n-m)/R_HRS) for n active inputs
// and m matches. A ROWS x COLS array holds ROWS/2 logical inputs.
//
// Interface: prog_* writes one weight once (the write decoder's job); with
// rd_en high the model samples in_bits/in_act on the rising clock edge and
// presents the column currents (microamperes, real) on i_col one cycle later.
// The cell encoding and XNOR truth table follow the paper; the resistance
// values, read voltage and one-cycle read are assumptions of this model.
module sot_crossbar #(
  parameter int  ROWS       = 256,
  parameter int  COLS       = 256,
  parameter real R_LRS_KOHM = 1000.0,
  parameter real R_HRS_KOHM = 2000.0,
  parameter real V_READ     = 0.1
) (
  input  logic                      clk,
  input  logic                      prog_en,
  input  logic [$clog2(ROWS/2)-1:0] prog_row,
  input  logic [$clog2(COLS)-1:0]   prog_col,
  input  logic                      prog_w,
  input  logic                      rd_en,
  input  logic [ROWS/2-1:0]         in_bits,
  input  logic [ROWS/2-1:0]         in_act,
  output real                       i_col [COLS]
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int LROWS = ROWS / 2;

  // mtj[r][c] = 1 means the cell is in the low-resistance (parallel) state
  logic [COLS-1:0] mtj [ROWS];

  initial begin
    for (int r = 0; r < ROWS; r++) mtj[r] = '0;
    for (int c = 0; c < COLS; c++) i_col[c] = 0.0;
  end

  always_ff @(posedge clk) begin
    if (prog_en) begin
      mtj[2*prog_row][prog_col]   <= prog_w;
      mtj[2*prog_row+1][prog_col] <= !prog_w;
    end
  end

  // microamperes: V / kOhm = mA, times 1000
  localparam real I_L = 1000.0 * V_READ / R_LRS_KOHM;
  localparam real I_H = 1000.0 * V_READ / R_HRS_KOHM;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int c = 0; c < COLS; c++) begin
        real acc;
        acc = 0.0;
        for (int k = 0; k < LROWS; k++) begin
          if (in_act[k]) begin
            // +1 input reads row 2k, -1 input reads row 2k+1
            acc = acc + ((in_bits[k] ? mtj[2*k][c] : mtj[2*k+1][c]) ? I_L : I_H);
          end
        end
        i_col[c] <= acc;
      end
    end
  end

endmodule
