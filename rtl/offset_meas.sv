// offset_meas -- the flip-flop bank of one phase-offset measurement.
//
// What it does.  Node w's oscillator offers 2*L taps of its ring; for each
// neighbour v there is one bank of 2*L flip-flops, clocked by v's clock,
// that takes a snapshot of those taps at every rising edge of clk_meas.  The
// snapshot is a unary code of the offset of w relative to v: Q^i = 1 when w
// is not more than (2i-1)*kappa + delta behind, Q^-i = 1 when w is at least
// (2i-1)*kappa - delta ahead.  The word is ordered Q^L..Q^1 Q^-1..Q^-L, so
// it always reads as ones followed by zeros (1100 for aligned clocks with
// L = 2); an assertion checks this thermometer shape.
//
// Interface and timing.  q changes only at the rising edge of clk_meas and
// is valid one clock-to-Q delay later; it feeds v's control module directly.
// rst_n (asynchronous, active low) loads the code of a zero offset, 1^L 0^L,
// so that the control module sees "no neighbour ahead" until the first
// snapshot.  The flip-flops and their placement follow the improved
// measurement circuit of the design; the reset is this design's addition.
module offset_meas import pals_pkg::*; #(
  parameter int unsigned L = ELL
) (
  input  logic           clk_meas,  // clock of the measuring neighbour v
  input  logic           rst_n,
  input  logic [2*L-1:0] tap,       // taps of the measured node's ring
  output logic [2*L-1:0] q          // snapshot Q^L..Q^1 Q^-1..Q^-L
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam logic [2*L-1:0] ZERO_OFFSET = {{L{1'b1}}, {L{1'b0}}};

  always_ff @(posedge clk_meas or negedge rst_n) begin
    if (!rst_n) q <= ZERO_OFFSET;
    else        q <= tap;
  end

  // Thermometer code: no 1 below a 0.  A violation means the offset is
  // outside the measurable range (close to half a clock period).
  a_thermometer: assert property (@(posedge clk_meas) disable iff (!rst_n)
    (q[2*L-2:0] & ~q[2*L-1:1]) == '0)
    else $error("offset_meas: snapshot %b is not a thermometer code", q);
endmodule
