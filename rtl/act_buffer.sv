// Activation buffer: binary layer inputs and outputs.
//
// Three banks of MAX_IN bits (bit 1 = +1). Bank 0 keeps the network input,
// loaded 32 bits at a time through ld_*, and is never overwritten by the
// datapath, so every Monte-Carlo forward pass restarts from the same input.
// Banks 1 and 2 ping-pong between layers: a layer reads one bank (whole
// vector on rd_vec, selected by rd_bank, combinational) while its sign bits
// are written one at a time into the other (wr_*, synchronous). With wr_or
// set, a write ORs the bit into the stored one: a 2x2 max-pool of +-1 values
// is the OR of their bits, so a pooled output is built by writing its four
// inputs to the same index after clearing the bank (clr_en/clr_bank, one
// cycle, not together with a write to the same bank). Buffering the
// activations between the sequential layers is implied by the paper; the bank
// arrangement and the load port are this design's.
module act_buffer #(
  parameter int MAX_IN = 1280
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             ld_en,
  input  logic [$clog2((MAX_IN+31)/32)-1:0] ld_addr,
  input  logic [31:0]                      ld_data,
  input  logic                             wr_en,
  input  logic [1:0]                       wr_bank,
  input  logic [$clog2(MAX_IN)-1:0]        wr_idx,
  input  logic                             wr_bit,
  input  logic                             wr_or,
  input  logic                             clr_en,
  input  logic [1:0]                       clr_bank,
  input  logic [1:0]                       rd_bank,
  output logic [MAX_IN-1:0]                rd_vec
);
  timeunit 1ns;
  timeprecision 1ps;

  localparam int NW = (MAX_IN + 31) / 32;
  logic [NW*32-1:0]  in_bank;
  logic [MAX_IN-1:0] pp [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_bank <= '0;
      pp[0]   <= '0;
      pp[1]   <= '0;
    end else begin
      if (ld_en) in_bank[32*int'(ld_addr) +: 32] <= ld_data;
      if (clr_en && clr_bank != 2'd0) pp[clr_bank[1]] <= '0;
      if (wr_en && wr_bank != 2'd0)
        pp[wr_bank[1]][wr_idx] <= wr_bit | (wr_or & pp[wr_bank[1]][wr_idx]);
    end
  end

  a_clr_wr: assert property (@(posedge clk) disable iff (!rst_n)
      (clr_en && wr_en) |-> (clr_bank != wr_bank))
    else $error("act_buffer: write into the bank being cleared");

  always_comb begin
    unique case (rd_bank)
      2'd1:    rd_vec = pp[0];
      2'd2:    rd_vec = pp[1];
      default: rd_vec = in_bank[MAX_IN-1:0];
    endcase
  end
endmodule
