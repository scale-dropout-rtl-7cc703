// LeNet-5 workload on the Scale-Dropout accelerator at its default size.
//
// The classic LeNet-5 shape on a 32x32 binary image: conv 5x5x1 -> 6 with
// 2x2 max-pool (14x14x6), conv 5x5x6 -> 16 with 2x2 max-pool (5x5x16),
// fully connected 400 -> 120 -> 84 -> 10. Each kernel is unrolled into a
// crossbar column (25 and 150 inputs: one and two arrays), the fully
// connected layers take four, one and one array: nine of the ten arrays. The
// small layers use 10 % and 20 % dropout and the 400-input layer 50 %. Weights,
// scales, batch-norm coefficients and the image are random; the testbench
// runs a Monte-Carlo inference of T = 10 passes and a point estimate and
// recomputes every pass with its own model (unrolled patches, saturating
// tile sums, unitary dropout, Q16.16 scale and batch norm, sign, OR pooling),
// comparing every logit and the final means and variances, and checks the cycle count of
// the point-estimate pass against the schedule. It counts output positions,
// pooled writes, kept and dropped scales, and fails if one never occurs.
module tb_lenet5_workload;
  timeunit 1ns;
  timeprecision 1ps;
  import sd_pkg::*;

  localparam int NX = 10, XR = 256, XC = 256, LR = XR / 2, NL = 5, NC = 10;
  localparam int MI = NX * LR;
  localparam int T_MC = 10;

  logic clk = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;

  // DUT ports
  logic rst_n = 0;
  logic w_prog_en = 0, w_bit = 0;
  logic [$clog2(NX)-1:0] w_xbar = '0;
  logic [$clog2(LR)-1:0] w_row = '0;
  logic [$clog2(XC)-1:0] w_col = '0;
  logic sc_we = 0, bn_we = 0;
  logic [$clog2(NL)-1:0] sc_row = '0, bn_row = '0;
  logic [$clog2(XC)-1:0] sc_col = '0, bn_col = '0;
  logic [31:0] sc_wdata = '0;
  logic [63:0] bn_wdata = '0;
  logic in_ld_en = 0;
  logic [$clog2((MI+31)/32)-1:0] in_ld_addr = '0;
  logic [31:0] in_ld_data = '0;
  logic desc_we = 0;
  logic [$clog2(NL)-1:0] desc_idx = '0;
  layer_desc_t desc_wdata = '0;
  logic [$clog2(NL+1)-1:0] n_layers = '0;
  logic [7:0] n_runs = '0;
  logic mc_en = 0, start = 0, busy, done;
  logic d_valid, d_mask, out_valid;
  logic [$clog2(NC)-1:0] out_cls;
  logic signed [31:0] out_logit;
  logic [7:0] out_run;
  logic signed [31:0] mean [NC];
  logic [63:0] variance [NC];

  scaledrop_cim_top dut (.*);

  // network
  layer_desc_t L [NL];
  bit   wt [NX][LR][XC];
  int   sc [NL][XC];
  int   ba [NL][XC], bb [NL][XC];
  bit   xin [MI];

  // observations
  bit      dq [$];
  longint  lg [$];
  int      lg_run [$], lg_cls [$];

  // mechanism counters
  int drop_cnt [NL], mc_cnt [NL];
  int n_pos = 0, n_poolw = 0;
  int cyc = 0, last_cycles = 0;
  always @(posedge clk) cyc++;
  int n_multitile = 0, n_sat = 0, n_keep = 0, n_drop = 0, n_stall = 0, n_skip = 0, n_point = 0, n_avg = 0, n_var = 0;

  always @(posedge clk) if (rst_n) begin
    if (d_valid) dq.push_back(d_mask);
    if (out_valid) begin
      lg.push_back(longint'(out_logit));
      lg_run.push_back(int'(out_run));
      lg_cls.push_back(int'(out_cls));
    end
    if (dut.psum_we && !dut.acc_clr) n_multitile++;
    if (dut.u_ctrl.state.name() == "S_WAITD" && !dut.u_ctrl.d_have) n_stall++;
    if (dut.u_ctrl.state.name() == "S_GATHER" && dut.u_ctrl.ky == '0) n_pos++;
    if (dut.act_we && dut.act_wr_or) n_poolw++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // reference: one forward pass with the given mask bits, returns the logits
  task automatic ref_pass(input bit dm [NL], output longint lo [NC], output int sats);
    bit x [MI];
    bit y [MI];
    sats = 0;
    foreach (x[i]) x[i] = xin[i];
    for (int l = 0; l < NL; l++) begin
      int npos, ow, pw;
      foreach (y[i]) y[i] = 1'b0;
      ow   = L[l].conv ? int'(L[l].in_w) - int'(L[l].k) + 1 : 1;
      pw   = ow / 2;
      npos = ow * ow;
      for (int pos = 0; pos < npos; pos++) begin
        int oy, ox;
        oy = pos / ow; ox = pos % ow;
        for (int c = 0; c < int'(L[l].out_len); c++) begin
          int acc, idx;
          logic signed [127:0] p, z, v;
          longint s;
          acc = 0;
          for (int t = 0; t < int'(L[l].n_tiles); t++) begin
            int n, m, raw;
            n = int'(L[l].in_len) - t * LR;
            if (n > LR) n = LR;
            m = 0;
            for (int k = 0; k < n; k++) begin
              int j, src;
              j = t * LR + k;
              if (L[l].conv) begin
                int rl;
                rl  = int'(L[l].k) * int'(L[l].c_in);
                src = ((oy + j / rl) * int'(L[l].in_w) + ox) * int'(L[l].c_in) + j % rl;
              end else src = j;
              if (x[src] == wt[int'(L[l].first_xbar) + t][k][c]) m++;
            end
            raw = (t == 0 ? 0 : acc) + 2 * m - n;
            if (raw != sat8(raw)) sats++;
            acc = sat8(raw);
          end
          s = dm[l] ? longint'(sc[l][c]) : 64'sd65536;
          p = 128'(acc) * 128'(s);
          z = p * 128'(ba[l][c]);
          z = (z - ((z % 65536 + 65536) % 65536)) / 65536 + 128'(bb[l][c]);
          v = z;
          if (v > 128'sd2147483647) v = 128'sd2147483647;
          if (v < -128'sd2147483648) v = -128'sd2147483648;
          if (L[l].pool) idx = ((oy / 2) * pw + ox / 2) * int'(L[l].out_len) + c;
          else           idx = pos * int'(L[l].out_len) + c;
          if (L[l].conv) begin
            if (!L[l].pool || (oy / 2 < pw && ox / 2 < pw)) y[idx] = y[idx] | (z >= 0);
          end else y[c] = (z >= 0);
          if (l == NL - 1) lo[c] = longint'(v);
        end
      end
      foreach (x[i]) x[i] = y[i];
    end
  endtask

  task automatic inference(input bit mc, input int runs);
    longint sum [NC];
    logic signed [127:0] ssq [NC], ev;
    int c0;
    dq.delete(); lg.delete(); lg_run.delete(); lg_cls.delete();
    @(negedge clk);
    mc_en = mc; n_runs = 8'(runs); n_layers = 3'(NL);
    start = 1;
    c0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    last_cycles = cyc - c0;
    @(negedge clk);
    checks += 2;
    if (dq.size() != runs * NL) begin failures++; $display("FAIL %0d masks", dq.size()); end
    if (lg.size() != runs * NC) begin failures++; $display("FAIL %0d logits", lg.size()); end
    foreach (sum[c]) begin sum[c] = 0; ssq[c] = 0; end
    for (int r = 0; r < runs && dq.size() == runs * NL && lg.size() == runs * NC; r++) begin
      bit dm [NL];
      longint lo [NC];
      int sats;
      for (int l = 0; l < NL; l++) begin
        dm[l] = dq[r * NL + l];
        if (!mc) begin checks++; if (!dm[l]) failures++; end
        if (mc) begin if (dm[l]) n_keep++; else n_drop++; mc_cnt[l]++; drop_cnt[l] += int'(!dm[l]); end
      end
      ref_pass(dm, lo, sats);
      n_sat += sats;
      for (int c = 0; c < NC; c++) begin
        checks += 3;
        if (lg[r * NC + c] != lo[c]) begin
          failures++;
          $display("FAIL run %0d class %0d logit %0d exp %0d", r, c, lg[r * NC + c], lo[c]);
        end
        if (lg_run[r * NC + c] != r) failures++;
        if (lg_cls[r * NC + c] != c) failures++;
        sum[c] += lo[c];
        ssq[c] += 128'(lo[c]) * 128'(lo[c]);
      end
    end
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (longint'(mean[c]) != sum[c] / runs) begin
        failures++;
        $display("FAIL mean %0d = %0d exp %0d", c, mean[c], sum[c] / runs);
      end
      ev = (128'(runs) * ssq[c] - 128'(sum[c]) * 128'(sum[c])) / (128'(runs) * 128'(runs));
      checks++;
      if (128'(variance[c]) != ev) begin
        failures++;
        $display("FAIL variance %0d = %0d exp %0d", c, variance[c], ev);
      end
      if (variance[c] != 0) n_var++;
    end
    if (!mc) n_point++;
    if (runs > 1) n_avg++;
  endtask

  initial begin
    L[0] = '{first_xbar: 4'd0, n_tiles: 4'd1, in_len: 11'd25,  out_len: 9'd6,   p_keep: 8'd230,
             conv: 1'b1, pool: 1'b1, k: 3'd5, in_w: 6'd32, c_in: 9'd1, default: '0};
    L[1] = '{first_xbar: 4'd1, n_tiles: 4'd2, in_len: 11'd150, out_len: 9'd16,  p_keep: 8'd230,
             conv: 1'b1, pool: 1'b1, k: 3'd5, in_w: 6'd14, c_in: 9'd6, default: '0};
    L[2] = '{first_xbar: 4'd3, n_tiles: 4'd4, in_len: 11'd400, out_len: 9'd120, p_keep: 8'd128, default: '0};
    L[3] = '{first_xbar: 4'd7, n_tiles: 4'd1, in_len: 11'd120, out_len: 9'd84,  p_keep: 8'd205, default: '0};
    L[4] = '{first_xbar: 4'd8, n_tiles: 4'd1, in_len: 11'd84,  out_len: 9'd10,  p_keep: 8'd205, default: '0};
    foreach (xin[i]) xin[i] = (i < 1024) ? 1'($urandom) : 1'b0;
    foreach (wt[x, r, c]) wt[x][r][c] = 1'($urandom);
    foreach (sc[l, c]) sc[l][c] = 32768 + int'($urandom % 65536);
    foreach (ba[l, c]) begin
      ba[l][c] = 16384 + int'($urandom % 65536);
      if ($urandom % 2) ba[l][c] = -ba[l][c];
      bb[l][c] = int'($urandom % (16 * 65536)) - 8 * 65536;
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    // program weights of the arrays in use
    for (int l = 0; l < NL; l++)
      for (int t = 0; t < int'(L[l].n_tiles); t++)
        for (int r = 0; r < LR; r++)
          for (int c = 0; c < int'(L[l].out_len); c++) begin
            w_prog_en = 1;
            w_xbar = 4'(int'(L[l].first_xbar) + t);
            w_row = 7'(r); w_col = 8'(c);
            w_bit = wt[int'(L[l].first_xbar) + t][r][c];
            @(negedge clk);
          end
    w_prog_en = 0;
    for (int l = 0; l < NL; l++)
      for (int c = 0; c < XC; c++) begin
        sc_we = 1; sc_row = 3'(l); sc_col = 8'(c); sc_wdata = 32'(sc[l][c]);
        bn_we = 1; bn_row = 3'(l); bn_col = 8'(c); bn_wdata = {32'(ba[l][c]), 32'(bb[l][c])};
        @(negedge clk);
      end
    sc_we = 0; bn_we = 0;
    for (int w = 0; w < (MI + 31) / 32; w++) begin
      logic [31:0] v;
      for (int b = 0; b < 32; b++) v[b] = (32 * w + b < MI) ? xin[32 * w + b] : 1'b0;
      in_ld_en = 1; in_ld_addr = 6'(w); in_ld_data = v;
      @(negedge clk);
    end
    in_ld_en = 0;
    for (int l = 0; l < NL; l++) begin
      desc_we = 1; desc_idx = 3'(l); desc_wdata = L[l];
      @(negedge clk);
    end
    desc_we = 0;

    foreach (mc_cnt[l]) begin mc_cnt[l] = 0; drop_cnt[l] = 0; end
    inference(1'b1, T_MC);
    inference(1'b0, 1);
    // point-estimate schedule: per convolution 1 + positions * (K gather +
    // 3 per tile + 1 + channels + 4 drain) + 1, per vector layer
    // 3 * tiles + outputs + 7, plus 2 for start and done
    begin
      int expc;
      expc = 2;
      foreach (L[l]) begin
        if (L[l].conv) begin
          int ow;
          ow = int'(L[l].in_w) - int'(L[l].k) + 1;
          expc += 2 + ow * ow * (int'(L[l].k) + 3 * int'(L[l].n_tiles) + 5 + int'(L[l].out_len));
        end else expc += 3 * int'(L[l].n_tiles) + int'(L[l].out_len) + 7;
      end
      checks++;
      $display("point-estimate pass: %0d cycles (expected %0d)", last_cycles, expc);
      if (last_cycles != expc) failures++;
    end

    $display("mechanisms: positions=%0d pooled_writes=%0d multitile=%0d keep=%0d drop=%0d stall=%0d point=%0d avg=%0d nonzero_variance=%0d",
             n_pos, n_poolw, n_multitile, n_keep, n_drop, n_stall, n_point, n_avg, n_var);
    checks += 10;
    // (28*28 + 10*10) positions per pass, 11 passes
    if (n_pos != 11 * (28 * 28 + 10 * 10)) begin failures++; $display("FAIL positions %0d", n_pos); end
    if (n_poolw != 11 * (28 * 28 * 6 + 10 * 10 * 16)) begin failures++; $display("FAIL pooled writes %0d", n_poolw); end
    if (n_multitile == 0) failures++;
    if (n_keep == 0) failures++;
    if (n_drop == 0) failures++;
    if (n_stall == 0) failures++;
    if (n_point == 0) failures++;
    if (n_avg == 0) failures++;
    if (n_var == 0) failures++;
    if (n_sat != 0) $display("saturated tile sums: %0d", n_sat);
    checks++;
    if (n_pos == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
