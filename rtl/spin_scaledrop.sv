// Behavioural model (not synthesizable logic: a stochastic SOT-MTJ with its
// drive transistors and sense amplifier).
//
// The Spin-ScaleDrop random source. A current pulse through the heavy-metal
// SOT track (SET) switches the MTJ to the antiparallel state with a
// probability that grows with the pulse length t as 1 - exp(-t/tau); a RESET
// pulse of the opposite polarity returns it to the parallel state. The sense
// amplifier reads the state through the separate read path, so it may sense
// while RESET flows. Ports follow the four-transistor drive of the circuit
// diagram: set_i / reset_i stand for SET and RESET (their complements drive
// the PMOS devices inside the cell). p_keep abstracts the write current: it is
// the switching probability of a full T_SET_NS pulse, in units of 1/256, and
// tau follows from it. Device variation follows the paper's model of a
// Gaussian shift of the probability: every SET draws p + P_OFFSET + P_SIGMA*n,
// n standard normal, clipped to [0, 1] (a shift eps of the dropout
// probability is a shift -eps here); both default to 0, an ideal device. A RESET shorter than T_RESET_NS leaves the state unchanged.
// The 10 ns / 5 ns pulse lengths are the paper's; the probability-code
// abstraction of the write current is this model's.
module spin_scaledrop #(
  parameter real P_OFFSET   = 0.0,
  parameter real P_SIGMA    = 0.0,
  parameter real T_SET_NS   = 10.0,
  parameter real T_RESET_NS = 5.0
) (
  input  logic       set_i,
  input  logic       reset_i,
  input  logic [7:0] p_keep,
  input  logic       sa_en,
  output logic       sa_out
);
  timeunit 1ns;
  timeprecision 1ps;

  logic    ap;      // 1: antiparallel (switched)
  logic    set_q, rst_q;
  realtime t_set0, t_rst0;

  // standard normal sample (Box-Muller)
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 65535) + 1.0) / 65536.0;
    u2 = real'($urandom % 65536) / 65536.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    ap     = 1'b0;
    set_q  = 1'b0;
    rst_q  = 1'b0;
    t_set0 = 0.0;
    t_rst0 = 0.0;
  end

  // one process owns the MTJ state: pulse starts are time-stamped, the end of
  // a SET pulse may switch the device, the end of a long enough RESET pulse
  // returns it to the parallel state
  always @(set_i or reset_i) begin
    if (!set_q && set_i)  t_set0 = $realtime;
    if (!rst_q && reset_i) t_rst0 = $realtime;
    if (set_q && !set_i) begin
      real p_full, p, t;
      t      = $realtime - t_set0;
      p_full = real'(p_keep) / 256.0 + P_OFFSET + P_SIGMA * gauss();
      if (p_full < 0.0) p_full = 0.0;
      if (p_full > 1.0) p_full = 1.0;
      // same tau for every pulse length: P(no switch) = (1-p_full)^(t/T_SET_NS)
      p = 1.0 - $pow(1.0 - p_full, t / T_SET_NS);
      if (real'($urandom % 65536) < p * 65536.0) ap = 1'b1;
    end
    if (rst_q && !reset_i && ($realtime - t_rst0 >= T_RESET_NS - 0.001)) ap = 1'b0;
    set_q = set_i;
    rst_q = reset_i;
  end

  assign sa_out = sa_en & ap;

endmodule
