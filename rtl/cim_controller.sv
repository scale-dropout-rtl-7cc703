// Layer and Monte-Carlo controller of the Scale-Dropout accelerator.
//
// A forward pass runs the layers one after another. For every layer the
// controller
//   1. asks the shared Spin-ScaleDrop module for a fresh mask bit (with the
//      layer's own keep probability), unless point-estimate mode is selected
//      (mc_en = 0), in which case the mask is forced to 1 and all scales apply;
//   2. applies the layer's input vector, one 128-input row tile at a time, to
//      the crossbar arrays that hold the tile's weights: crossbar read (1
//      cycle), ADC conversion (1 cycle), accumulate into the partial-sum
//      register (1 cycle), so a layer of n tiles takes 3n cycles;
//   3. waits until the mask bit has arrived (the 15-cycle sampling overlaps
//      step 2, so a short layer stalls here);
//   4. streams the output channels, one per cycle, through a four-stage
//      pipeline: read sum + scale, mux + multiply, batch norm, sign/write.
//      Outputs go to the other activation bank, to the skip buffer when the
//      layer saves its outputs, and to the averaging block for the last layer.
// A convolutional layer repeats steps 2 and 4 for every output position
// (stride 1, no padding): each output channel's KxKxC_in kernel is unrolled
// into one crossbar column, and before the tile reads the controller gathers
// the position's patch into a register, one kernel row (K*C_in adjacent bits
// of the input map) per cycle. Outputs go to index pixel*out_len + channel;
// with pooling, to the pixel of the 2x2-pooled map as OR-writes into a bank
// cleared when the layer starts. All positions share the layer's mask bit.
// A Monte-Carlo inference repeats the forward pass n_runs times from the
// unchanged input; the averaging block then holds the predictive mean.
// The layer descriptors (sd_pkg::layer_desc_t) are written through desc_*.
// Cycles per layer in point-estimate mode: 3*tiles + out_len + 7 for a vector
// layer, 2 + positions*(K + 3*tiles + out_len + 5) for a convolution, plus 2
// per pass.
// The order of operations (one mask per layer from a single shared module,
// T passes averaged) and the unrolled-kernel mapping of convolutions are the
// paper's; the state machine, the patch gather, the pooling, the tile
// mapping and all timing are this design's.
module cim_controller
  import sd_pkg::*;
#(
  parameter int N_LAYERS = 5,
  parameter int N_XBAR   = 10,
  parameter int XB_ROWS  = 256,
  parameter int XB_COLS  = 256,
  parameter int MAX_IN   = N_XBAR * XB_ROWS / 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  logic                          desc_we,
  input  logic [$clog2(N_LAYERS)-1:0]   desc_idx,
  input  layer_desc_t                   desc_wdata,
  input  logic [$clog2(N_LAYERS+1)-1:0] n_layers,
  input  logic [7:0]                    n_runs,
  input  logic                          mc_en,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // crossbar / ADC / accumulator
  input  logic [MAX_IN-1:0]             act_vec,
  output logic [$clog2(N_XBAR)-1:0]     xb_sel,
  output logic                          xb_rd_en,
  output logic [XB_ROWS/2-1:0]          xb_in_bits,
  output logic [XB_ROWS/2-1:0]          xb_in_act,
  output logic                          adc_conv,
  output logic [8:0]                    n_act,
  output logic                          acc_clr,
  output logic                          psum_we,
  // dropout module
  output logic                          rng_req,
  output logic [7:0]                    rng_p_keep,
  input  logic                          rng_busy,
  input  logic                          rng_done,
  input  logic                          rng_d,
  output logic                          d_mask,
  output logic                          d_valid,
  // channel pipeline
  output logic                          psum_rd_en,
  output logic [$clog2(XB_COLS)-1:0]    psum_rd_col,
  output logic                          mem_re,
  output logic [$clog2(N_LAYERS)-1:0]   mem_row,
  output logic [$clog2(XB_COLS)-1:0]    mem_col,
  output logic                          mult_en,
  output logic                          bn_re,
  output logic [$clog2(XB_COLS)-1:0]    bn_col,
  output logic                          bn_en,
  output logic                          skip_re,
  output logic [$clog2(XB_COLS)-1:0]    skip_ridx,
  output logic                          add_skip,
  output logic                          skip_we,
  output logic [$clog2(XB_COLS)-1:0]    skip_widx,
  output logic                          act_we,
  output logic                          act_wr_or,
  output logic                          act_clr,
  output logic [1:0]                    act_wr_bank,
  output logic [$clog2(MAX_IN)-1:0]     act_wr_idx,
  output logic [1:0]                    act_rd_bank,
  output logic                          avg_clr,
  output logic                          avg_acc,
  output logic [$clog2(XB_COLS)-1:0]    out_cls,
  output logic                          last_layer,
  output logic [7:0]                    run_idx,
  output logic [$clog2(N_LAYERS)-1:0]   layer_idx
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int LROWS = XB_ROWS / 2;
  localparam int CW    = $clog2(XB_COLS);

  typedef enum logic [3:0] {
    S_IDLE, S_LSTART, S_GATHER, S_READ, S_ADC, S_ACC, S_WAITD, S_CH, S_DRAIN, S_LEND, S_DONE
  } state_t;

  state_t      state;
  layer_desc_t desc [N_LAYERS];
  layer_desc_t cur;
  logic [3:0]  tile;
  logic [8:0]  ch;
  logic        d_have;
  logic [2:0]  pv;             // pipeline valid of stages 1..3
  logic [CW-1:0] pch [4];      // channel index per stage
  logic        cfg_mc;
  // convolution: output position, kernel row being gathered, unrolled patch
  logic [5:0]  oy, ox;
  logic [2:0]  ky;
  logic [MAX_IN-1:0] patch;
  logic [5:0]  ow;             // output width = height
  logic        last_pos;

  assign cur        = desc[layer_idx];
  assign last_layer = (int'(layer_idx) == int'(n_layers) - 1);

  // descriptor table
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < N_LAYERS; l++) desc[l] <= '0;
    end else if (desc_we && !busy) begin
      desc[desc_idx] <= desc_wdata;
    end
  end

  // inputs of the current tile
  logic [10:0] tile_base;
  logic [10:0] remain;
  assign tile_base = 11'(int'(tile) * LROWS);
  assign remain    = cur.in_len - tile_base;
  assign n_act     = (remain > 11'(LROWS)) ? 9'(LROWS) : 9'(remain);
  always_comb begin
    for (int k = 0; k < LROWS; k++) begin
      if (int'(tile_base) + k < MAX_IN)
        xb_in_bits[k] = cur.conv ? patch[int'(tile_base) + k] : act_vec[int'(tile_base) + k];
      else
        xb_in_bits[k] = 1'b0;
      xb_in_act[k]  = (k < int'(n_act));
    end
  end

  // convolution patch gather: kernel row ky of output position (oy, ox) is
  // K*c_in adjacent bits of the input map, placed at ky*K*c_in of the patch
  logic [MAX_IN-1:0] seg;
  always_comb begin
    int src, rowlen, dst;
    logic [MAX_IN-1:0] rowmask;
    src     = ((int'(oy) + int'(ky)) * int'(cur.in_w) + int'(ox)) * int'(cur.c_in);
    rowlen  = int'(cur.k) * int'(cur.c_in);
    dst     = int'(ky) * rowlen;
    rowmask = ~({MAX_IN{1'b1}} << rowlen);
    seg     = ((act_vec >> src) & rowmask) << dst;
  end
  assign ow       = cur.in_w - 6'(cur.k) + 6'd1;
  assign last_pos = (ox == ow - 6'd1) && (oy == ow - 6'd1);
  assign xb_sel = $clog2(N_XBAR)'(cur.first_xbar + tile);

  // main state machine
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      layer_idx   <= '0;
      run_idx     <= '0;
      tile        <= '0;
      ch          <= '0;
      d_have      <= 1'b0;
      d_mask      <= 1'b1;
      d_valid     <= 1'b0;
      act_rd_bank <= 2'd0;
      act_wr_bank <= 2'd1;
      cfg_mc      <= 1'b0;
      done        <= 1'b0;
      oy          <= '0;
      ox          <= '0;
      ky          <= '0;
      patch       <= '0;
    end else begin
      done    <= 1'b0;
      d_valid <= 1'b0;
      if (rng_done && !d_have) begin
        d_have  <= 1'b1;
        d_mask  <= rng_d;
        d_valid <= 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          layer_idx   <= '0;
          run_idx     <= '0;
          act_rd_bank <= 2'd0;
          act_wr_bank <= 2'd1;
          cfg_mc      <= mc_en;
          state       <= S_LSTART;
        end
        S_LSTART: begin
          tile <= '0;
          if (cfg_mc) begin
            d_have <= 1'b0;
          end else begin
            d_have  <= 1'b1;
            d_mask  <= 1'b1;
            d_valid <= 1'b1;
          end
          oy    <= '0;
          ox    <= '0;
          ky    <= '0;
          state <= cur.conv ? S_GATHER : S_READ;
        end
        S_GATHER: begin
          patch <= (ky == '0) ? seg : (patch | seg);
          if (ky == cur.k - 3'd1) begin
            ky    <= '0;
            tile  <= '0;
            state <= S_READ;
          end else begin
            ky <= ky + 3'd1;
          end
        end
        S_READ: state <= S_ADC;
        S_ADC:  state <= S_ACC;
        S_ACC: begin
          if (tile + 4'd1 < cur.n_tiles) begin
            tile  <= tile + 4'd1;
            state <= S_READ;
          end else begin
            state <= S_WAITD;
          end
        end
        S_WAITD: if (d_have) begin
          ch    <= '0;
          state <= S_CH;
        end
        S_CH: begin
          if (ch + 9'd1 >= cur.out_len) state <= S_DRAIN;
          ch <= ch + 9'd1;
        end
        S_DRAIN: if (pv[2:0] == '0) begin
          if (cur.conv && !last_pos) begin
            if (ox == ow - 6'd1) begin
              ox <= '0;
              oy <= oy + 6'd1;
            end else begin
              ox <= ox + 6'd1;
            end
            state <= S_GATHER;
          end else begin
            state <= S_LEND;
          end
        end
        S_LEND: begin
          if (last_layer) begin
            if (run_idx + 8'd1 >= n_runs) begin
              state <= S_DONE;
            end else begin
              run_idx     <= run_idx + 8'd1;
              layer_idx   <= '0;
              act_rd_bank <= 2'd0;
              act_wr_bank <= 2'd1;
              state       <= S_LSTART;
            end
          end else begin
            layer_idx   <= layer_idx + 1'b1;
            act_rd_bank <= act_wr_bank;
            act_wr_bank <= (act_wr_bank == 2'd1) ? 2'd2 : 2'd1;
            state       <= S_LSTART;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy       = (state != S_IDLE);
  assign rng_req    = (state == S_LSTART) && cfg_mc;
  assign rng_p_keep = cur.p_keep;
  assign xb_rd_en   = (state == S_READ);
  assign adc_conv   = (state == S_ADC);
  assign psum_we    = (state == S_ACC);
  assign acc_clr    = (tile == '0);
  assign avg_clr    = (state == S_IDLE) && start;

  // channel pipeline: stage 0 issue, 1 multiply, 2 batch norm, 3 sign/write
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pv <= '0;
      for (int s = 0; s < 4; s++) pch[s] <= '0;
    end else begin
      pv     <= {pv[1:0], (state == S_CH)};
      pch[0] <= CW'(ch);
      for (int s = 1; s < 4; s++) pch[s] <= pch[s-1];
    end
  end

  // stage 0 is combinational from the state; the shift register above
  // carries stages 1..3 (pv[0] = stage 1, pv[1] = stage 2, pv[2] = stage 3)
  assign psum_rd_en  = (state == S_CH);
  assign psum_rd_col = CW'(ch);
  assign mem_re      = (state == S_CH);
  assign mem_row     = layer_idx;
  assign mem_col     = CW'(ch);
  assign mult_en     = pv[0];
  assign bn_re       = pv[0];
  assign bn_col      = pch[0];
  assign bn_en       = pv[1];
  assign skip_re     = pv[1] && cur.add_skip;
  assign skip_ridx   = pch[1];
  assign add_skip    = cur.add_skip;
  // output index: channel for a vector layer; (pixel * out_len + channel)
  // for a convolution, with the pixel of the 2x2-pooled map when pooling
  logic [5:0] pw;
  logic       pos_in;
  int         pix;
  assign pw     = ow >> 1;
  assign pos_in = !cur.pool || ((oy >> 1) < pw && (ox >> 1) < pw);
  assign pix    = cur.pool ? int'(oy[5:1]) * int'(pw) + int'(ox[5:1]) : int'(oy) * int'(ow) + int'(ox);
  assign act_we      = pv[2] && !last_layer && pos_in;
  assign act_wr_idx  = cur.conv ? $clog2(MAX_IN)'(pix * int'(cur.out_len) + int'(pch[2]))
                                : $clog2(MAX_IN)'(pch[2]);
  assign act_wr_or   = cur.pool;
  assign act_clr     = (state == S_LSTART) && cur.pool;
  assign skip_we     = pv[2] && cur.save_skip;
  assign skip_widx   = pch[2];
  assign avg_acc     = pv[2] && last_layer;
  assign out_cls     = pch[2];

  // rules of the descriptor table and the dropout handshake
  a_tiles: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_LSTART) |-> (cur.n_tiles != '0 && int'(cur.first_xbar) + int'(cur.n_tiles) <= N_XBAR))
    else $error("cim_controller: layer %0d maps outside the crossbar arrays", layer_idx);
  a_width: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_LSTART) |-> (cur.out_len != '0 && int'(cur.out_len) <= XB_COLS
                               && int'(cur.in_len) <= int'(cur.n_tiles) * LROWS))
    else $error("cim_controller: layer %0d has an invalid shape", layer_idx);
  a_conv: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_LSTART && cur.conv) |->
        (cur.k != '0 && cur.in_w >= 6'(cur.k)
         && int'(cur.in_len) == int'(cur.k) * int'(cur.k) * int'(cur.c_in)
         && int'(cur.in_w) * int'(cur.in_w) * int'(cur.c_in) <= MAX_IN
         && (cur.pool ? int'(pw) * int'(pw) : int'(ow) * int'(ow)) * int'(cur.out_len) <= MAX_IN
         && !cur.save_skip && !cur.add_skip && !last_layer))
    else $error("cim_controller: layer %0d is not a valid convolution", layer_idx);
  a_pool: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_LSTART && cur.pool) |-> cur.conv)
    else $error("cim_controller: pooling on a vector layer %0d", layer_idx);
  a_rng_idle: assert property (@(posedge clk) disable iff (!rst_n) rng_req |-> !rng_busy)
    else $error("cim_controller: dropout module still busy");

endmodule
