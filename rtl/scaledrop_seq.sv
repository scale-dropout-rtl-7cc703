// Spin-ScaleDrop pulse sequencer: the digital side of the dropout module.
//
// One request (req, sampled while idle) produces one Bernoulli mask bit:
// SET_CYC cycles of SET current, then RESET_CYC cycles of RESET current; in
// the first RESET cycle the sense amplifier is enabled and its output is
// latched as the mask bit d (1 = keep the scale, 0 = drop it to one). done
// pulses for one cycle when RESET ends, SET_CYC + RESET_CYC cycles after the
// request edge, and d stays valid until the next request. p_keep is held
// steady on p_o (write-current setting) for the MTJ. With a 1 ns clock the
// defaults give the 10 ns SET, 5 ns RESET and 15 ns sampling latency of the
// paper; the clock period and the sense point are this design's choices.
module scaledrop_seq #(
  parameter int SET_CYC   = 10,
  parameter int RESET_CYC = 5
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req,
  input  logic [7:0] p_keep,
  output logic       set_o,
  output logic       reset_o,
  output logic       sa_en_o,
  output logic [7:0] p_o,
  input  logic       sa_i,
  output logic       busy,
  output logic       done,
  output logic       d
);
  timeunit 1ns;
  timeprecision 1ps;

  typedef enum logic [1:0] {S_IDLE, S_SET, S_RST} state_t;
  state_t     state;
  logic [7:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
      d     <= 1'b1;
      p_o   <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (req) begin
          state <= S_SET;
          cnt   <= '0;
          p_o   <= p_keep;
        end
        S_SET: begin
          if (int'(cnt) == SET_CYC - 1) begin
            state <= S_RST;
            cnt   <= '0;
          end else cnt <= cnt + 8'd1;
        end
        S_RST: begin
          if (cnt == '0) d <= sa_i;
          if (int'(cnt) == RESET_CYC - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else cnt <= cnt + 8'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign set_o   = (state == S_SET);
  assign reset_o = (state == S_RST);
  assign sa_en_o = (state == S_RST) && (cnt == '0);
  assign busy    = (state != S_IDLE);

  // a request is only honoured while idle
  a_no_req_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !req)
    else $error("scaledrop_seq: request while busy");

endmodule
