// tunable_osc -- behavioural model of a node's tunable ring oscillator with
// the offset-measurement taps built into its ring.
//
// This is a behavioural model, not synthesizable logic: the real part is a
// ring of inverters, some of them current-starved, whose delay is set by the
// mode input md (slow or fast), and the delay elements of the ring double as
// the delay line of the time-to-digital converters that the neighbours use
// to measure this node's phase.
//
// How it works.  A base node n0 of the ring toggles every half period.  The
// half period is T_SLOW/2 / ((1+DRIFT)(1+MU)) in fast mode and
// T_SLOW/2 / (1+DRIFT) in slow mode; md is looked at once per half period,
// so the oscillator follows a mode change within one half period (the
// response time T_osc, about 250 ps at 2 GHz).  The clock output and the
// 2*L taps are copies of n0 delayed by the stage delays of the ring.  With
// t_clk the time of a rising clock edge, tap Q^i rises at
// t_clk - (2i-1)*KAPPA - DELTA and tap Q^-i at t_clk + (2i-1)*KAPPA - DELTA.
// A neighbour v that samples the taps at its own rising edge t_v therefore
// reads Q^i = 1 iff t_v - t_clk >= -(2i-1)*KAPPA - DELTA and Q^-i = 1 iff
// t_v - t_clk >= (2i-1)*KAPPA - DELTA, i.e. the thresholds of the fast
// trigger on the offset estimate L_clk - L_v.
//
// Interface.  en starts the ring (it stays at rest, all outputs low, while
// en is low); md selects fast (1) or slow (0); clk is the node clock; tap is
// a measurement word in the order Q^L..Q^1 Q^-1..Q^-L (see pals_pkg).
//
// Following the design described for the 15 nm implementation: the ring
// with starved inverters for the mode, the tap positions kappa and 2*kappa
// apart, the delta stage between the top tap and the clock output, and the
// 2 GHz / mu = 1e-4 figures.  This model's own choices: the enable input,
// the per-instance constant drift, ideal (noise-free) stage delays, and all
// taps having the polarity of the clock (the real ring alternates inverting
// stages and compensates with an inverted clock output).
//
// A synthesis tool that ignores the delays sees n0 feeding its own inverse:
// that loop is the ring of the ring oscillator and is meant to be there.
module tunable_osc import pals_pkg::*; #(
  parameter int unsigned L       = ELL,
  parameter real         T_SLOW  = T_CLK_PS,  // slow-mode period, no drift, ps
  parameter real         MU_F    = MU,        // fast-mode speed-up
  parameter real         DRIFT   = 0.0,       // this oscillator's rate excess, 0..rho
  parameter real         KAPPA   = KAPPA_PS,  // threshold step, ps
  parameter real         DELTA   = DELTA_PS   // measurement offset, ps
) (
  input  logic           en,
  input  logic           md,
  output logic           clk,
  output logic [2*L-1:0] tap
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam real HALF_SLOW = T_SLOW / 2.0 / (1.0 + DRIFT);
  localparam real HALF_FAST = HALF_SLOW / (1.0 + MU_F);
  // delay from the base node to the earliest tap (Q^L): zero; to the
  // clock output: (2L-1)*kappa + delta
  localparam real BASE = real'(2 * L - 1) * KAPPA;

  logic n0;

  initial n0 = 1'b0;

  always begin
    if (!en) begin
      n0 = 1'b0;
      @(posedge en);
    end
    #(md ? HALF_FAST : HALF_SLOW);
    n0 = ~n0;
  end

  assign #(BASE + DELTA) clk = n0;

  for (genvar i = 1; i <= L; i++) begin : g_tap
    assign #(BASE - real'(2 * i - 1) * KAPPA) tap[qpos(L, i)] = n0;
    assign #(BASE + real'(2 * i - 1) * KAPPA) tap[qneg(L, i)] = n0;
  end
endmodule
