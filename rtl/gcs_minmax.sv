// gcs_minmax -- largest and smallest offset over all neighbours, in unary.
//
// The fast trigger only needs the largest and the smallest offset estimate
// of a node.  With the unary measurement words this is bitwise: the
// largest offset has Q^-i set when any neighbour's word has Q^-i set (an OR
// over the neighbours), and the smallest offset has Q^i set only when every
// neighbour's word has Q^i set (an AND).  A node also counts itself as a
// neighbour at offset zero; zero sets all Q^i and no Q^-i, which leaves the
// AND and the OR unchanged, so only the real neighbours are inputs.  An
// unused input slot must be tied to the zero-offset word 1^L 0^L.
//
// Purely combinational (AND and OR gates, as in the design); q_min[i-1] is
// Q^i_min and q_max[i-1] is Q^-i_max.  The gates mask a metastable input
// whenever the other inputs decide the result, which is why no
// synchronizer is needed in front of this block.
module gcs_minmax import pals_pkg::*; #(
  parameter int unsigned L = ELL,
  parameter int unsigned N = NBR
) (
  input  logic [N-1:0][2*L-1:0] q_w,    // one measurement word per neighbour
  output logic [L-1:0]          q_min,  // q_min[i-1] = Q^i_min
  output logic [L-1:0]          q_max   // q_max[i-1] = Q^-i_max
);
  always_comb begin
    for (int unsigned i = 1; i <= L; i++) begin
      q_min[i-1] = 1'b1;
      q_max[i-1] = 1'b0;
      for (int unsigned k = 0; k < N; k++) begin
        q_min[i-1] = q_min[i-1] & q_w[k][qpos(L, i)];
        q_max[i-1] = q_max[i-1] | q_w[k][qneg(L, i)];
      end
    end
  end
endmodule
