// Testbench of the layer / Monte-Carlo controller on its own. The testbench
// plays the dropout module (answers each request after 15 cycles with a
// random mask bit) and offers a fixed activation vector. It logs every
// crossbar read, ADC conversion, accumulate, channel issue and write, and
// compares them with the sequence expected from the layer descriptors:
// arrays and input slices per tile, active-input counts, clear on the first
// tile, channel order, pipeline spacing (multiply +1, batch norm +2,
// write +3 cycles), ping-pong banks, one mask request per layer, no channel
// before the mask arrives, outputs of the last layer only to the averaging
// block, and the exact cycle count of a point-estimate pass. A second
// configuration turns the first layer into a pooled 3x3 convolution and
// checks, for every output position, the unrolled patch applied to the
// crossbars, the pooled output index of every write, the OR-write and bank
// clear strobes, and the cycle count of the convolution.
module tb_cim_controller;
  timeunit 1ns;
  timeprecision 1ps;
  import sd_pkg::*;

  localparam int NL = 3, NX = 6, XR = 32, XC = 16, LR = XR / 2, MI = NX * LR;
  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic rst_n = 0, desc_we = 0, mc_en = 0, start = 0, busy, done;
  logic [$clog2(NL)-1:0] desc_idx = '0;
  layer_desc_t desc_wdata = '0;
  logic [$clog2(NL+1)-1:0] n_layers = '0;
  logic [7:0] n_runs = '0;
  logic [MI-1:0] act_vec;
  logic [$clog2(NX)-1:0] xb_sel;
  logic xb_rd_en, adc_conv, acc_clr, psum_we;
  logic [LR-1:0] xb_in_bits, xb_in_act;
  logic [8:0] n_act;
  logic rng_req, rng_busy, rng_done, rng_d, d_mask, d_valid;
  logic [7:0] rng_p_keep, run_idx;
  logic psum_rd_en, mem_re, mult_en, bn_re, bn_en, skip_re, add_skip, skip_we, act_we, act_wr_or, act_clr, avg_clr, avg_acc, last_layer;
  logic [$clog2(XC)-1:0] psum_rd_col, mem_col, bn_col, skip_ridx, skip_widx, out_cls;
  logic [$clog2(NL)-1:0] mem_row, layer_idx;
  logic [1:0] act_wr_bank, act_rd_bank;
  logic [$clog2(MI)-1:0] act_wr_idx;

  cim_controller #(.N_LAYERS(NL), .N_XBAR(NX), .XB_ROWS(XR), .XB_COLS(XC)) dut (.*);

  // dropout-module stand-in: 15 cycles per request
  int rng_cnt = 0;
  logic rng_bit;
  assign rng_busy = (rng_cnt != 0);
  always @(posedge clk) begin
    rng_done <= 1'b0;
    if (rng_req) begin rng_cnt <= 15; rng_bit <= 1'($urandom); end
    else if (rng_cnt > 0) begin
      rng_cnt <= rng_cnt - 1;
      if (rng_cnt == 1) begin rng_done <= 1'b1; rng_d <= rng_bit; end
    end
  end

  layer_desc_t L [NL];
  int ev_rd [$], ev_adc [$], ev_we [$], ev_iss [$], ev_mul [$], ev_bn [$], ev_wr [$], ev_avg [$], ev_req [$];
  int last_done_cyc, first_iss_after [$];
  logic cur_d;
  int pos_cnt = 0, wr_in_pos = 0, n_clr = 0;

  always @(posedge clk) if (rst_n) begin
    if (xb_rd_en) begin
      int l, t, base;
      ev_rd.push_back(cyc);
      l = int'(layer_idx);
      t = int'(xb_sel) - int'(L[l].first_xbar);
      base = t * LR;
      if (L[l].conv && t == 0) begin pos_cnt++; wr_in_pos = 0; end
      checks += 3;
      if (t < 0 || t >= int'(L[l].n_tiles)) failures++;
      if (int'(n_act) != ((int'(L[l].in_len) - base > LR) ? LR : int'(L[l].in_len) - base)) begin
        failures++; $display("FAIL n_act %0d layer %0d tile %0d", n_act, l, t);
      end
      for (int k = 0; k < LR; k++) begin
        if (xb_in_act[k] != (k < int'(n_act))) failures++;
        if (xb_in_act[k]) begin
          int src;
          if (L[l].conv) begin
            int ow, oy, ox, rl;
            ow = int'(L[l].in_w) - int'(L[l].k) + 1;
            oy = (pos_cnt - 1) / ow; ox = (pos_cnt - 1) % ow;
            rl = int'(L[l].k) * int'(L[l].c_in);
            src = ((oy + (base + k) / rl) * int'(L[l].in_w) + ox) * int'(L[l].c_in) + (base + k) % rl;
          end else src = base + k;
          if (xb_in_bits[k] != act_vec[src]) begin failures++; $display("FAIL patch bit %0d pos %0d", base + k, pos_cnt - 1); end
        end
      end
    end
    if (adc_conv) ev_adc.push_back(cyc);
    if (psum_we) begin
      ev_we.push_back(cyc);
      checks++;
      if (acc_clr != (int'(xb_sel) == int'(L[layer_idx].first_xbar))) failures++;
    end
    if (rng_req) ev_req.push_back(cyc);
    if (psum_rd_en) begin
      ev_iss.push_back(cyc);
      checks += 3;
      if (mem_row != layer_idx || mem_col != psum_rd_col || !mem_re) failures++;
      if (d_mask != cur_d) begin failures++; $display("FAIL mask used %0d", d_mask); end
      if (rng_busy) failures++;
    end
    if (mult_en) ev_mul.push_back(cyc);
    if (bn_en) ev_bn.push_back(cyc);
    if (act_we) begin
      ev_wr.push_back(cyc);
      checks += 2;
      if (act_wr_bank == act_rd_bank || act_wr_bank == 2'd0) failures++;
      if (layer_idx == 0 && act_rd_bank != 2'd0) failures++;
      if (act_wr_or != L[layer_idx].pool) failures++;
      if (L[layer_idx].conv) begin
        int ow, oy, ox, pix;
        ow = int'(L[layer_idx].in_w) - int'(L[layer_idx].k) + 1;
        oy = (pos_cnt - 1) / ow; ox = (pos_cnt - 1) % ow;
        pix = L[layer_idx].pool ? (oy / 2) * (ow / 2) + ox / 2 : oy * ow + ox;
        checks++;
        if (int'(act_wr_idx) != pix * int'(L[layer_idx].out_len) + wr_in_pos) begin
          failures++; $display("FAIL conv write index %0d pos %0d", act_wr_idx, pos_cnt - 1);
        end
        wr_in_pos++;
      end else begin
        checks++;
        if (int'(act_wr_idx) != wr_in_pos) failures++;
        wr_in_pos++;
      end
    end
    if (avg_acc) begin
      ev_avg.push_back(cyc);
      checks++;
      if (!last_layer) failures++;
    end
    if (rng_done) cur_d <= rng_d;
    if (act_clr) begin
      n_clr++;
      checks++;
      if (!L[layer_idx].pool || act_wr_bank == act_rd_bank || act_wr_bank == 2'd0) failures++;
    end
    if (psum_we && acc_clr && !L[layer_idx].conv) wr_in_pos = 0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit mc, input int runs, output int cycles);
    int c0;
    ev_rd.delete(); ev_adc.delete(); ev_we.delete(); ev_iss.delete(); ev_mul.delete();
    ev_bn.delete(); ev_wr.delete(); ev_avg.delete(); ev_req.delete();
    mc_en = mc; n_runs = 8'(runs); n_layers = NL[$clog2(NL+1)-1:0];
    cur_d = 1'b1;
    @(negedge clk) start = 1;
    c0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - c0;
  endtask

  initial begin
    int cycles, exp_rd, exp_ch, exp_last, exp_cycles;
    act_vec = {$urandom, $urandom, $urandom};
    L[0] = '{first_xbar: 4'd0, n_tiles: 4'd3, in_len: 11'd40, out_len: 9'd16, p_keep: 8'd230, save_skip: 1'b0, add_skip: 1'b0, default: '0};
    L[1] = '{first_xbar: 4'd3, n_tiles: 4'd1, in_len: 11'd16, out_len: 9'd9,  p_keep: 8'd128, save_skip: 1'b1, add_skip: 1'b0, default: '0};
    L[2] = '{first_xbar: 4'd4, n_tiles: 4'd2, in_len: 11'd20, out_len: 9'd5,  p_keep: 8'd205, save_skip: 1'b0, add_skip: 1'b1, default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      @(negedge clk);
      desc_we = 1; desc_idx = l[$clog2(NL)-1:0]; desc_wdata = L[l];
    end
    @(negedge clk) desc_we = 0;

    foreach (L[l]) begin
      exp_rd += int'(L[l].n_tiles);
      exp_ch += int'(L[l].out_len);
    end
    exp_last = int'(L[NL-1].out_len);

    // point estimate, one pass: exact schedule
    run(1'b0, 1, cycles);
    exp_cycles = 0;
    foreach (L[l]) exp_cycles += 3 * int'(L[l].n_tiles) + int'(L[l].out_len) + 7;
    exp_cycles += 2;   // the edge that takes start, and the DONE state
    checks += 9;
    if (ev_rd.size() != exp_rd || ev_adc.size() != exp_rd || ev_we.size() != exp_rd) failures++;
    if (ev_req.size() != 0) failures++;
    if (ev_iss.size() != exp_ch || ev_mul.size() != exp_ch || ev_bn.size() != exp_ch) failures++;
    if (ev_wr.size() != exp_ch - exp_last) failures++;
    if (ev_avg.size() != exp_last) failures++;
    if (cycles != exp_cycles) begin failures++; $display("FAIL cycles %0d exp %0d", cycles, exp_cycles); end
    for (int i = 0; i < ev_rd.size(); i++) begin
      checks += 2;
      if (ev_adc[i] != ev_rd[i] + 1) failures++;
      if (ev_we[i] != ev_rd[i] + 2) failures++;
    end
    for (int i = 0; i < ev_iss.size(); i++) begin
      checks += 2;
      if (ev_mul[i] != ev_iss[i] + 1) failures++;
      if (ev_bn[i] != ev_iss[i] + 2) failures++;
    end
    begin


      for (int i = 0; i < ev_iss.size(); i++) begin
        // writes and averaging together follow issue by 3 cycles
        int w;
        w = (i < exp_ch - exp_last) ? ev_wr[i] : ev_avg[i - (exp_ch - exp_last)];
        checks++;
        if (w != ev_iss[i] + 3) failures++;
      end
    end

    // Monte-Carlo: 4 passes, one mask request per layer and pass
    run(1'b1, 4, cycles);
    checks += 4;
    if (ev_req.size() != 4 * NL) begin failures++; $display("FAIL %0d requests", ev_req.size()); end
    if (ev_rd.size() != 4 * exp_rd) failures++;
    if (ev_avg.size() != 4 * exp_last) failures++;
    if (ev_iss.size() != 4 * exp_ch) failures++;

    // layer 0 as a pooled convolution: 6x6x2 input, 3x3 kernel, 4 channels,
    // 4x4 positions pooled to 2x2x4 = 16 outputs feeding layer 1
    L[0] = '{first_xbar: 4'd0, n_tiles: 4'd2, in_len: 11'd18, out_len: 9'd4, p_keep: 8'd230,
             save_skip: 1'b0, add_skip: 1'b0, conv: 1'b1, pool: 1'b1, k: 3'd3, in_w: 6'd6, c_in: 9'd2};
    @(negedge clk);
    desc_we = 1; desc_idx = '0; desc_wdata = L[0];
    @(negedge clk) desc_we = 0;
    pos_cnt = 0; n_clr = 0;
    run(1'b0, 1, cycles);
    exp_cycles = 2 + (1 + 16 * (3 + 3 * 2 + 1 + 4 + 4) + 1);
    for (int l = 1; l < NL; l++) exp_cycles += 3 * int'(L[l].n_tiles) + int'(L[l].out_len) + 7;
    checks += 4;
    if (cycles != exp_cycles) begin failures++; $display("FAIL conv cycles %0d exp %0d", cycles, exp_cycles); end
    if (pos_cnt != 16) begin failures++; $display("FAIL %0d positions", pos_cnt); end
    if (n_clr != 1) failures++;
    if (ev_iss.size() != 16 * 4 + int'(L[1].out_len) + int'(L[2].out_len)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
