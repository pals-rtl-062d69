// pals_pkg -- constants and helpers shared by the gradient-clocking blocks.
//
// A PALS node measures the phase offset to each neighbour as a unary
// (thermometer) word of 2*L bits.  Throughout this design the word is
// stored MSB first in the order Q^L ... Q^1 Q^-1 ... Q^-L, so that two
// perfectly aligned clocks read 1100 for L = 2.  Bit Q^i (i > 0) says
// "the neighbour is not behind by (2i-1)*kappa + delta or more"; bit Q^-i
// says "the neighbour is ahead by at least (2i-1)*kappa - delta".
//
// The numbers below are the ones of the 15 nm implementation: L = 2
// thresholds per sign, kappa = 10 ps, delta = 5 ps, 2 GHz oscillators
// (500 ps period) whose fast mode is faster by mu = 1e-4, and a drift bound
// rho = 1e-5.  Times are in picoseconds; every module that handles delays
// uses a femtosecond precision so that a 1e-4 rate change (25 fs per half
// period) is representable.
package pals_pkg;
  timeunit 1ps;
  timeprecision 1fs;

  // number of thresholds per sign (ell)
  localparam int unsigned ELL = 2;
  // threshold step kappa and measurement uncertainty delta, in ps
  localparam real KAPPA_PS = 10.0;
  localparam real DELTA_PS = 5.0;
  // nominal slow-mode clock period (2 GHz), in ps
  localparam real T_CLK_PS = 500.0;
  // speed-up of the fast mode and bound on the one-sided oscillator drift
  localparam real MU = 1.0e-4;
  localparam real RHO = 1.0e-5;
  // neighbours of the node drawn in the node schematic
  localparam int unsigned NBR = 3;
  // nodes of the simulated line
  localparam int unsigned LINE_NODES = 4;

  // Position of Q^i (i >= 1) in a 2*l bit measurement word.
  function automatic int unsigned qpos(int unsigned l, int unsigned i);
    return l + i - 1;
  endfunction

  // Position of Q^-i (i >= 1) in a 2*l bit measurement word.
  function automatic int unsigned qneg(int unsigned l, int unsigned i);
    return l - i;
  endfunction

  // A node's drift in [0, rho]: a fixed spread over the nodes of a system so
  // that neighbouring oscillators never run at exactly the same rate.
  function automatic real node_drift(int unsigned n, real rho);
    return rho * real'((n * 3) % 4) / 3.0;
  endfunction
endpackage
