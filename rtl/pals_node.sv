// pals_node -- one clock island of the gradient clock synchronization.
//
// A node holds the three parts of the clocked algorithm: its tunable
// oscillator, which produces clk; one offset_meas flip-flop bank per
// neighbour, sitting at this node's ring taps and clocked by that
// neighbour's clock (so the bank for neighbour w produces Q_{v,w}: this
// node's offset as measured by w, which is sent to w); and the control
// module (gcs_minmax followed by gcs_mode), which takes the measurements
// the neighbours made of themselves relative to this node, Q_{w,v}, and
// sets the mode md of the oscillator.
//
// Every rising edge of a neighbour w's clock updates Q_{v,w}; every rising
// edge of this node's clock updates all Q_{w,v} in the neighbours.  The
// control path is combinational, so md settles one gate delay after the
// snapshot, and the oscillator applies it within one half period.
//
// Interface: neighbour slot k carries clk_nbr[k] (w_k's clock), q_in[k]
// (Q_{w_k,v}, from w_k's node) and q_out[k] (Q_{v,w_k}, to w_k's node).  An
// unused slot takes clk_nbr[k] = 0 and q_in[k] = 1^L 0^L (zero offset).
// Structure as in the design's node schematic; the enable and reset inputs
// are this design's own.
module pals_node import pals_pkg::*; #(
  parameter int unsigned L      = ELL,
  parameter int unsigned N      = NBR,
  parameter real         T_SLOW = T_CLK_PS,
  parameter real         MU_F   = MU,
  parameter real         DRIFT  = 0.0,
  parameter real         KAPPA  = KAPPA_PS,
  parameter real         DELTA  = DELTA_PS
) (
  input  logic                  rst_n,    // async reset of the measurement flip-flops
  input  logic                  en,       // oscillator enable
  input  logic [N-1:0]          clk_nbr,  // neighbours' clocks
  input  logic [N-1:0][2*L-1:0] q_in,     // Q_{w_k,v}, measured in w_k's ring
  output logic                  clk,      // this node's clock
  output logic                  md,       // mode: 1 fast, 0 slow
  output logic [N-1:0][2*L-1:0] q_out     // Q_{v,w_k}, measured in this ring
);
  timeunit 1ps;
  timeprecision 1fs;

  logic [2*L-1:0] tap;
  logic [L-1:0]   q_min, q_max;

  tunable_osc #(
    .L(L), .T_SLOW(T_SLOW), .MU_F(MU_F), .DRIFT(DRIFT), .KAPPA(KAPPA), .DELTA(DELTA)
  ) u_osc (
    .en (en),
    .md (md),
    .clk(clk),
    .tap(tap)
  );

  for (genvar k = 0; k < N; k++) begin : g_meas
    offset_meas #(.L(L)) u_meas (
      .clk_meas(clk_nbr[k]),
      .rst_n   (rst_n),
      .tap     (tap),
      .q       (q_out[k])
    );
  end

  gcs_minmax #(.L(L), .N(N)) u_minmax (
    .q_w  (q_in),
    .q_min(q_min),
    .q_max(q_max)
  );

  gcs_mode #(.L(L)) u_mode (
    .q_min(q_min),
    .q_max(q_max),
    .md   (md)
  );
endmodule
