// Averaging block: Monte-Carlo model averaging of the output layer.
//
// Over T stochastic forward passes the output-layer logit of every class is
// added into a per-class sum (acc_en with cls/logit; clr empties all sums).
// mean[c] = sum[c] / n_runs is the predictive mean of MC-Scale-Dropout,
// formed by a combinational signed divider (truncation toward zero). Sums are
// LOGIT_W + 8 bits wide, enough for 255 passes without overflow. A second
// per-class register sums the squared logits, and variance[c] is the
// population variance of the T passes, (T*sumsq - sum^2) / T^2 (truncated),
// in the squared logit format (Q32.32 for Q16.16 logits). All outputs are
// valid the cycle after the last acc_en. The paper names this block and
// defines the mean and the variance as the uncertainty estimate; the insides
// and widths are this design's, and confidence intervals are left to the host.
module avg_block #(
  parameter int N_CLASS = 10,
  parameter int LOGIT_W = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       acc_en,
  input  logic [$clog2(N_CLASS)-1:0] cls,
  input  logic signed [LOGIT_W-1:0]  logit,
  input  logic [7:0]                 n_runs,
  output logic signed [LOGIT_W+7:0]  sum  [N_CLASS],
  output logic signed [LOGIT_W-1:0]  mean [N_CLASS],
  output logic [2*LOGIT_W-1:0]       variance [N_CLASS]
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int SW = LOGIT_W + 8;
  localparam int QW = 2 * SW + 1;  // square terms and their difference

  logic [2*LOGIT_W+7:0] sumsq [N_CLASS];
  logic signed [2*LOGIT_W-1:0] sq;
  assign sq = (2*LOGIT_W)'(logit) * (2*LOGIT_W)'(logit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CLASS; c++) begin sum[c] <= '0; sumsq[c] <= '0; end
    end else if (clr) begin
      for (int c = 0; c < N_CLASS; c++) begin sum[c] <= '0; sumsq[c] <= '0; end
    end else if (acc_en && int'(cls) < N_CLASS) begin
      sum[cls]   <= sum[cls] + SW'(logit);
      sumsq[cls] <= sumsq[cls] + (2*LOGIT_W+8)'($unsigned(sq));
    end
  end

  always_comb begin
    for (int c = 0; c < N_CLASS; c++) begin
      logic signed [SW-1:0] q;  // |q| <= |sum|, the top bits only repeat the sign
      q = (n_runs == 8'd0) ? sum[c] : sum[c] / SW'($signed({1'b0, n_runs}));
      mean[c] = q[LOGIT_W-1:0];
    end
  end

  always_comb begin
    for (int c = 0; c < N_CLASS; c++) begin
      logic signed [QW-1:0] num, den, v;
      num = QW'($signed({1'b0, n_runs})) * QW'($signed({1'b0, sumsq[c]}))
          - QW'(sum[c]) * QW'(sum[c]);
      den = QW'($signed({1'b0, n_runs})) * QW'($signed({1'b0, n_runs}));
      v   = (n_runs == 8'd0 || num < 0) ? '0 : num / den;
      variance[c] = v[2*LOGIT_W-1:0];
    end
  end
endmodule
