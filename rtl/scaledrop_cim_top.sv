// Scale-Dropout compute-in-memory accelerator, top level.
//
// Binary weights sit in N_XBAR SOT-MRAM crossbar arrays (one 128-input row
// tile of a layer per array, complementary cell pairs), each read by its own
// bank of column ADCs. The accumulator-adder sums the tiles of a layer into
// the 8-bit partial-sum register. The output channels are then processed one
// per cycle: the scale of (layer, channel) is read from the 32-bit scale SRAM,
// replaced by 1.0 when the layer's dropout mask bit is 0 (Unitary
// Scale-Dropout), multiplied with the sum, batch-normalised with folded
// per-channel coefficients from a second SRAM and binarised by the sign
// comparator into the next layer's input. A single Spin-ScaleDrop module
// (stochastic SOT-MTJ plus pulse sequencer) supplies one fresh mask bit per
// layer. The last layer's logits are summed over n_runs Monte-Carlo passes by
// the averaging block, whose mean and variance outputs are the predictive
// mean and its uncertainty estimate.
// Convolutional layers run one output position at a time with each kernel
// unrolled into a crossbar column; their outputs can be 2x2 max-pooled by
// OR-writes into the activation buffer.
//
// Programming ports (used while idle): w_* writes one binary weight of one
// array, sc_* one scale word, bn_* one pair of batch-norm coefficients
// ({A, B}, Q16.16 each), in_* 32 input bits, desc_* one layer descriptor.
// Operation: pulse start; busy stays high until done pulses. Observation
// ports: d_valid/d_mask show each layer's mask bit, out_valid/out_cls/
// out_logit each output-layer logit of each pass, mean the final averages,
// variance the per-class variance over the passes (Q32.32).
// The dataflow follows the paper's architecture diagram; the tile mapping,
// number formats, configuration ports and timing are this design's.
module scaledrop_cim_top
  import sd_pkg::*;
#(
  parameter int N_XBAR   = 10,
  parameter int XB_ROWS  = 256,
  parameter int XB_COLS  = 256,
  parameter int N_LAYERS = 5,
  parameter int ADC_BITS = 8,
  parameter int N_CLASS  = 10,
  parameter int SET_CYC  = 10,
  parameter int RESET_CYC = 5
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight programming (one-time write)
  input  logic                          w_prog_en,
  input  logic [$clog2(N_XBAR)-1:0]     w_xbar,
  input  logic [$clog2(XB_ROWS/2)-1:0]  w_row,
  input  logic [$clog2(XB_COLS)-1:0]    w_col,
  input  logic                          w_bit,
  // scale and batch-norm memories
  input  logic                          sc_we,
  input  logic [$clog2(N_LAYERS)-1:0]   sc_row,
  input  logic [$clog2(XB_COLS)-1:0]    sc_col,
  input  logic [SCALE_W-1:0]            sc_wdata,
  input  logic                          bn_we,
  input  logic [$clog2(N_LAYERS)-1:0]   bn_row,
  input  logic [$clog2(XB_COLS)-1:0]    bn_col,
  input  logic [2*BN_W-1:0]             bn_wdata,
  // network input
  input  logic                          in_ld_en,
  input  logic [$clog2((N_XBAR*XB_ROWS/2+31)/32)-1:0] in_ld_addr,
  input  logic [31:0]                   in_ld_data,
  // layer descriptors and run control
  input  logic                          desc_we,
  input  logic [$clog2(N_LAYERS)-1:0]   desc_idx,
  input  layer_desc_t                   desc_wdata,
  input  logic [$clog2(N_LAYERS+1)-1:0] n_layers,
  input  logic [7:0]                    n_runs,
  input  logic                          mc_en,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // observation
  output logic                          d_valid,
  output logic                          d_mask,
  output logic                          out_valid,
  output logic [$clog2(N_CLASS)-1:0]    out_cls,
  output logic signed [LOGIT_W-1:0]     out_logit,
  output logic [7:0]                    out_run,
  output logic signed [LOGIT_W-1:0]     mean [N_CLASS],
  output logic [2*LOGIT_W-1:0]          variance [N_CLASS]
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int LROWS  = XB_ROWS / 2;
  localparam int MAX_IN = N_XBAR * LROWS;
  localparam int CW     = $clog2(XB_COLS);

  // ---------------------------------------------------------------- control
  logic [MAX_IN-1:0]          act_vec;
  logic [$clog2(N_XBAR)-1:0]  xb_sel;
  logic                       xb_rd_en, adc_conv, acc_clr, psum_we;
  logic [LROWS-1:0]           xb_in_bits, xb_in_act;
  logic [8:0]                 n_act;
  logic                       rng_req, rng_busy, rng_done, rng_d;
  logic [7:0]                 rng_p_keep;
  logic                       psum_rd_en, mem_re, mult_en, bn_re, bn_en;
  logic [CW-1:0]              psum_rd_col, mem_col, bn_rcol, skip_ridx, skip_widx, ctl_out_cls;
  logic [$clog2(N_LAYERS)-1:0] mem_row, layer_idx;
  logic                       skip_re, add_skip, skip_we, act_we, act_wr_or, act_clr, avg_clr, avg_acc;
  logic [1:0]                 act_wr_bank, act_rd_bank;
  logic [$clog2(MAX_IN)-1:0]  act_wr_idx;
  logic [7:0]                 run_idx;

  cim_controller #(
    .N_LAYERS(N_LAYERS), .N_XBAR(N_XBAR), .XB_ROWS(XB_ROWS), .XB_COLS(XB_COLS)
  ) u_ctrl (
    .clk, .rst_n,
    .desc_we, .desc_idx, .desc_wdata, .n_layers, .n_runs, .mc_en, .start, .busy, .done,
    .act_vec, .xb_sel, .xb_rd_en, .xb_in_bits, .xb_in_act, .adc_conv, .n_act, .acc_clr, .psum_we,
    .rng_req, .rng_p_keep, .rng_busy, .rng_done, .rng_d, .d_mask, .d_valid,
    .psum_rd_en, .psum_rd_col, .mem_re, .mem_row, .mem_col, .mult_en, .bn_re, .bn_col(bn_rcol), .bn_en,
    .skip_re, .skip_ridx, .add_skip, .skip_we, .skip_widx, .act_we, .act_wr_or, .act_clr, .act_wr_bank, .act_wr_idx,
    .act_rd_bank, .avg_clr, .avg_acc, .out_cls(ctl_out_cls), .last_layer(), .run_idx, .layer_idx
  );

  // ------------------------------------------------------- crossbars + ADCs
  logic [ADC_BITS-1:0] adc_code [N_XBAR][XB_COLS];
  logic [N_XBAR-1:0]   adc_valid;

  for (genvar x = 0; x < N_XBAR; x++) begin : g_xbar
    real i_col [XB_COLS];
    sot_crossbar #(.ROWS(XB_ROWS), .COLS(XB_COLS)) u_xbar (
      .clk,
      .prog_en  (w_prog_en && !busy && int'(w_xbar) == x),
      .prog_row (w_row),
      .prog_col (w_col),
      .prog_w   (w_bit),
      .rd_en    (xb_rd_en && int'(xb_sel) == x),
      .in_bits  (xb_in_bits),
      .in_act   (xb_in_act),
      .i_col    (i_col)
    );
    xbar_adc #(.COLS(XB_COLS), .ADC_BITS(ADC_BITS)) u_adc (
      .clk, .rst_n,
      .conv  (adc_conv && int'(xb_sel) == x),
      .n_act (n_act),
      .i_col (i_col),
      .code  (adc_code[x]),
      .valid (adc_valid[x])
    );
  end

  // ----------------------------------------- accumulator-adder and register
  logic signed [ACC_W-1:0] acc_q [XB_COLS];
  logic signed [ACC_W-1:0] acc_d [XB_COLS];
  logic signed [ACC_W-1:0] psum_col;

  acc_adder #(.COLS(XB_COLS), .ADC_BITS(ADC_BITS), .ACC_W(ACC_W)) u_acc (
    .clr (acc_clr), .n_act (n_act), .code (adc_code[xb_sel]), .acc_in (acc_q), .acc_out (acc_d)
  );

  psum_reg #(.COLS(XB_COLS), .ACC_W(ACC_W)) u_psum (
    .clk, .rst_n, .we (psum_we), .d (acc_d), .q (acc_q),
    .rd_en (psum_rd_en), .rd_col (psum_rd_col), .rd_q (psum_col)
  );

  // ------------------------------------------------ scale path and dropout
  logic [SCALE_W-1:0] scale_q, scale_eff;
  logic [2*BN_W-1:0]  bn_q;

  scale_sram #(.WIDTH(SCALE_W), .ROWS(N_LAYERS), .COLS(XB_COLS)) u_scale_mem (
    .clk, .we (sc_we && !busy), .waddr_row (sc_row), .waddr_col (sc_col), .wdata (sc_wdata),
    .re (mem_re), .raddr_row (mem_row), .raddr_col (mem_col), .rdata (scale_q)
  );

  scale_sram #(.WIDTH(2*BN_W), .ROWS(N_LAYERS), .COLS(XB_COLS)) u_bn_mem (
    .clk, .we (bn_we && !busy), .waddr_row (bn_row), .waddr_col (bn_col), .wdata (bn_wdata),
    .re (bn_re), .raddr_row (layer_idx), .raddr_col (bn_rcol), .rdata (bn_q)
  );

  logic mtj_set, mtj_reset, mtj_sa_en, mtj_sa;
  logic [7:0] mtj_p;

  scaledrop_seq #(.SET_CYC(SET_CYC), .RESET_CYC(RESET_CYC)) u_drop_seq (
    .clk, .rst_n, .req (rng_req), .p_keep (rng_p_keep),
    .set_o (mtj_set), .reset_o (mtj_reset), .sa_en_o (mtj_sa_en), .p_o (mtj_p),
    .sa_i (mtj_sa), .busy (rng_busy), .done (rng_done), .d (rng_d)
  );

  spin_scaledrop u_spin_drop (
    .set_i (mtj_set), .reset_i (mtj_reset), .p_keep (mtj_p), .sa_en (mtj_sa_en), .sa_out (mtj_sa)
  );

  scale_mux #(.SW(SCALE_W)) u_mux (.d (d_mask), .scale (scale_q), .scale_eff (scale_eff));

  logic signed [PROD_W-1:0] prod;
  logic                     prod_v;

  scale_multiplier #(.ACC_W(ACC_W), .SCALE_W(SCALE_W)) u_mult (
    .clk, .rst_n, .en (mult_en), .a (psum_col), .b (scale_eff), .p (prod), .valid_o (prod_v)
  );

  logic signed [ZHAT_W-1:0] zhat;
  logic                     zhat_v;

  batchnorm #(.IN_W(PROD_W), .C_W(BN_W), .FRAC(SCALE_FRAC)) u_bn (
    .clk, .rst_n, .en (bn_en), .z (prod),
    .a_coef (bn_q[2*BN_W-1:BN_W]), .b_coef (bn_q[BN_W-1:0]),
    .zhat (zhat), .valid_o (zhat_v)
  );

  // ------------------------------------------------ sign, skip, averaging
  logic signed [LOGIT_W-1:0] skip_q, logit;
  logic                      act_bit;

  skip_buffer #(.COLS(XB_COLS), .W(LOGIT_W)) u_skip (
    .clk, .we (skip_we), .widx (skip_widx), .wdata (logit),
    .re (skip_re), .ridx (skip_ridx), .rdata (skip_q)
  );

  sign_act #(.IN_W(ZHAT_W), .LOGIT_W(LOGIT_W)) u_sign (
    .zhat (zhat), .skip_in (ZHAT_W'(skip_q)), .add_skip (add_skip), .act (act_bit), .logit (logit)
  );

  act_buffer #(.MAX_IN(MAX_IN)) u_act (
    .clk, .rst_n, .ld_en (in_ld_en && !busy), .ld_addr (in_ld_addr), .ld_data (in_ld_data),
    .wr_en (act_we), .wr_bank (act_wr_bank), .wr_idx (act_wr_idx), .wr_bit (act_bit),
    .wr_or (act_wr_or), .clr_en (act_clr), .clr_bank (act_wr_bank),
    .rd_bank (act_rd_bank), .rd_vec (act_vec)
  );

  logic signed [LOGIT_W+7:0] avg_sum [N_CLASS];

  avg_block #(.N_CLASS(N_CLASS), .LOGIT_W(LOGIT_W)) u_avg (
    .clk, .rst_n, .clr (avg_clr), .acc_en (avg_acc && int'(ctl_out_cls) < N_CLASS), .cls ($clog2(N_CLASS)'(ctl_out_cls)),
    .logit (logit), .n_runs (n_runs), .sum (avg_sum), .mean (mean), .variance (variance)
  );

  assign out_valid = avg_acc;
  assign out_cls   = $clog2(N_CLASS)'(ctl_out_cls);
  assign out_logit = logit;
  assign out_run   = run_idx;

  // the pipeline stages line up with the controller's schedule
  a_stage: assert property (@(posedge clk) disable iff (!rst_n) (act_we || avg_acc) |-> zhat_v)
    else $error("scaledrop_cim_top: sign stage without a normalised value");
  a_adc: assert property (@(posedge clk) disable iff (!rst_n) psum_we |-> adc_valid[xb_sel])
    else $error("scaledrop_cim_top: accumulate without converted codes");
  a_prod: assert property (@(posedge clk) disable iff (!rst_n) bn_en |-> prod_v)
    else $error("scaledrop_cim_top: batch norm without a product");

endmodule
