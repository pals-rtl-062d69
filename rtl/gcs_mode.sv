// gcs_mode -- the fast trigger: decides the oscillator mode of a node.
//
// The node goes fast when, for some threshold level i, the largest offset
// has crossed +(2i-1)*kappa - delta (Q^-i_max = 1: a neighbour is ahead by
// that much) while the smallest offset has not fallen below
// -(2i-1)*kappa - delta (Q^i_min = 1: no neighbour is behind by that much).
// So md = OR over i of (Q^i_min AND Q^-i_max); otherwise the node runs
// slow.  One AND gate per level and an OR gate, as in the design.
//
// Combinational; md is valid one gate delay after q_min / q_max settle and
// drives the oscillator's mode input directly.
module gcs_mode import pals_pkg::*; #(
  parameter int unsigned L = ELL
) (
  input  logic [L-1:0] q_min,  // q_min[i-1] = Q^i_min
  input  logic [L-1:0] q_max,  // q_max[i-1] = Q^-i_max
  output logic         md      // 1: fast mode, 0: slow mode
);
  always_comb md = |(q_min & q_max);
endmodule
