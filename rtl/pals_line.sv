// pals_line -- a line of PALS nodes, the system that the design is
// simulated on (4 nodes by default, 7 for the longer line).
//
// Node n talks to nodes n-1 and n+1.  Neighbour slot 0 of every node is its
// left neighbour and slot 1 its right one; the two end nodes leave one slot
// unused, with its measurement input tied to the zero-offset word 1^L 0^L,
// which is what a node would measure of itself.  Node n sends the word it
// measures for node n-1 (q_out slot 0, sampled with clk[n-1]) to node n-1,
// and so on.  The nodes' oscillators get a fixed drift spread over
// [0, RHO] (see pals_pkg::node_drift) so that no two neighbours run at the
// same rate.
//
// Ports: rst_n resets every measurement flip-flop to the zero-offset word;
// en[n] starts node n's oscillator, so skewed start times give the initial
// skews of a scenario; clk and md are each node's clock and mode; q_left[n]
// and q_right[n] are the words node n's control module receives about its
// left and right neighbour (Q_{n-1,n} and Q_{n+1,n}; the zero-offset word at
// the ends).  The line topology and node count follow the design's
// simulations; the start-up enables and the drift pattern are this
// design's own.
module pals_line import pals_pkg::*; #(
  parameter int unsigned NODES  = LINE_NODES,
  parameter int unsigned L      = ELL,
  parameter real         T_SLOW = T_CLK_PS,
  parameter real         MU_F   = MU,
  parameter real         RHO_F  = RHO,
  parameter real         KAPPA  = KAPPA_PS,
  parameter real         DELTA  = DELTA_PS
) (
  input  logic                      rst_n,
  input  logic [NODES-1:0]          en,
  output logic [NODES-1:0]          clk,
  output logic [NODES-1:0]          md,
  output logic [NODES-1:0][2*L-1:0] q_left,
  output logic [NODES-1:0][2*L-1:0] q_right
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam logic [2*L-1:0] ZERO_OFFSET = {{L{1'b1}}, {L{1'b0}}};

  // q_out[n][0]: node n as measured by node n-1; q_out[n][1]: by node n+1
  logic [NODES-1:0][1:0][2*L-1:0] q_out;
  logic [NODES-1:0][1:0][2*L-1:0] q_in;
  logic [NODES-1:0][1:0]          clk_nbr;

  for (genvar n = 0; n < NODES; n++) begin : g_node
    if (n == 0) begin : g_first
      assign clk_nbr[n][0] = 1'b0;
      assign q_in[n][0]    = ZERO_OFFSET;
    end else begin : g_left
      assign clk_nbr[n][0] = clk[n-1];
      assign q_in[n][0]    = q_out[n-1][1];
    end
    if (n == NODES - 1) begin : g_last
      assign clk_nbr[n][1] = 1'b0;
      assign q_in[n][1]    = ZERO_OFFSET;
    end else begin : g_right
      assign clk_nbr[n][1] = clk[n+1];
      assign q_in[n][1]    = q_out[n+1][0];
    end

    pals_node #(
      .L(L), .N(2), .T_SLOW(T_SLOW), .MU_F(MU_F), .DRIFT(node_drift(n, RHO_F)),
      .KAPPA(KAPPA), .DELTA(DELTA)
    ) u_node (
      .rst_n  (rst_n),
      .en     (en[n]),
      .clk_nbr(clk_nbr[n]),
      .q_in   (q_in[n]),
      .clk    (clk[n]),
      .md     (md[n]),
      .q_out  (q_out[n])
    );

    assign q_left[n]  = q_in[n][0];
    assign q_right[n] = q_in[n][1];
  end
endmodule
