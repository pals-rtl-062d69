// tb_line_workloads -- the line configurations the design was evaluated
// with, besides the default 4-node line, all run in one simulation.
//
//   line7     a line of 7 nodes (the second system size that was
//             simulated), scenarios ahead, behind and gradient.
//   var90     the 4-node line with every delay of the design (period,
//   var110    threshold step, measurement uncertainty) scaled to 90 % and
//             110 %, as a stand-in for the supply and transistor-size
//             variations; node 1 starts with an offset to the others
//             (scenario ahead).
//   links7    a 7-node line built here from pals_node with a delay on each
//             clock link to a neighbour: links leaving nodes 2, 3 and 4 are
//             fast (no extra delay), links leaving 0, 1, 5 and 6 are slow
//             (+1 ps, the delay the added wire capacitance gave).  50 ns after
//             each start the links leaving nodes 3 and 4 are switched to
//             slow.  Scenarios gradient and together (all nodes started at
//             once, since no start state is given for this setup).  The
//             words are shifted by the link delays, so only the fast and
//             slow conditions, the periods and the skew bounds are checked.
//
// Each configuration has its own line_bench, which checks words, modes,
// conditions, periods and final skews as described there; the totals are
// summed into one result line.
module tb_line_workloads;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned L       = ELL;
  localparam real         T_RUN   = 1000000.0;
  localparam int unsigned N7      = 7;
  localparam int unsigned N4      = LINE_NODES;
  localparam real         SW_TIME = 50000.0;   // link switch after start, ps
  localparam real         D_SLOW  = 1.0;       // slow link, ps
  localparam logic [2*L-1:0] ZERO_OFFSET = {{L{1'b1}}, {L{1'b0}}};

  localparam int NB = 4;
  logic [NB-1:0] done;
  int            checks [NB];
  int            failures [NB];

  // ------------------------------------------------------------ line7
  logic                   r7, d7;
  logic [N7-1:0]          e7, c7, m7;
  logic [N7-1:0][2*L-1:0] l7, q7;

  pals_line #(.NODES(N7)) u_line7 (
    .rst_n(r7), .en(e7), .clk(c7), .md(m7), .q_left(l7), .q_right(q7)
  );
  line_bench #(.NAME("line7"), .NODES(N7), .T_RUN(T_RUN)) b_line7 (
    .rst_n(r7), .en(e7), .clk(c7), .md(m7), .q_left(l7), .q_right(q7),
    .done(done[0]), .checks(checks[0]), .failures(failures[0])
  );

  // ------------------------------------------------------------ var90, var110
  logic                   r90, r110;
  logic [N4-1:0]          e90, c90, m90, e110, c110, m110;
  logic [N4-1:0][2*L-1:0] l90, q90, l110, q110;

  pals_line #(.T_SLOW(0.9 * T_CLK_PS), .KAPPA(0.9 * KAPPA_PS), .DELTA(0.9 * DELTA_PS)) u_var90 (
    .rst_n(r90), .en(e90), .clk(c90), .md(m90), .q_left(l90), .q_right(q90)
  );
  line_bench #(.NAME("var90"), .T_CLK(0.9 * T_CLK_PS), .KAPPA(0.9 * KAPPA_PS),
               .DELTA(0.9 * DELTA_PS), .T_RUN(T_RUN), .SCEN(4'b0001), .MECH(1'b0)) b_var90 (
    .rst_n(r90), .en(e90), .clk(c90), .md(m90), .q_left(l90), .q_right(q90),
    .done(done[1]), .checks(checks[1]), .failures(failures[1])
  );

  pals_line #(.T_SLOW(1.1 * T_CLK_PS), .KAPPA(1.1 * KAPPA_PS), .DELTA(1.1 * DELTA_PS)) u_var110 (
    .rst_n(r110), .en(e110), .clk(c110), .md(m110), .q_left(l110), .q_right(q110)
  );
  line_bench #(.NAME("var110"), .T_CLK(1.1 * T_CLK_PS), .KAPPA(1.1 * KAPPA_PS),
               .DELTA(1.1 * DELTA_PS), .T_RUN(T_RUN), .SCEN(4'b0001), .MECH(1'b0)) b_var110 (
    .rst_n(r110), .en(e110), .clk(c110), .md(m110), .q_left(l110), .q_right(q110),
    .done(done[2]), .checks(checks[2]), .failures(failures[2])
  );

  // ------------------------------------------------------------ links7
  logic                         rl;
  logic [N7-1:0]                el, cl, ml;
  logic [N7-1:0][2*L-1:0]       ll, ql;
  logic [N7-1:0]                cl_slow, cl_link, slow_link;
  logic [N7-1:0][1:0][2*L-1:0]  lq_out, lq_in;
  logic [N7-1:0][1:0]           lclk_nbr;

  // which nodes send over slow links; nodes 3 and 4 switch 50 ns after start
  always @(posedge rl) begin
    slow_link = 7'b110_0011;
    #(SW_TIME);
    slow_link = 7'b111_1011;
  end

  for (genvar n = 0; n < N7; n++) begin : g_link
    assign #(D_SLOW) cl_slow[n] = cl[n];
    assign cl_link[n] = slow_link[n] ? cl_slow[n] : cl[n];

    if (n == 0) begin : g_first
      assign lclk_nbr[n][0] = 1'b0;
      assign lq_in[n][0]    = ZERO_OFFSET;
    end else begin : g_left
      assign lclk_nbr[n][0] = cl_link[n-1];
      assign lq_in[n][0]    = lq_out[n-1][1];
    end
    if (n == N7 - 1) begin : g_last
      assign lclk_nbr[n][1] = 1'b0;
      assign lq_in[n][1]    = ZERO_OFFSET;
    end else begin : g_right
      assign lclk_nbr[n][1] = cl_link[n+1];
      assign lq_in[n][1]    = lq_out[n+1][0];
    end

    pals_node #(.N(2), .DRIFT(node_drift(n, RHO))) u_node (
      .rst_n(rl), .en(el[n]), .clk_nbr(lclk_nbr[n]), .q_in(lq_in[n]),
      .clk(cl[n]), .md(ml[n]), .q_out(lq_out[n])
    );
    assign ll[n] = lq_in[n][0];
    assign ql[n] = lq_in[n][1];
  end

  line_bench #(.NAME("links7"), .NODES(N7), .T_RUN(T_RUN), .SCEN(4'b1100),
               .EXACT(1'b0), .MECH(1'b0)) b_links7 (
    .rst_n(rl), .en(el), .clk(cl), .md(ml), .q_left(ll), .q_right(ql),
    .done(done[3]), .checks(checks[3]), .failures(failures[3])
  );

  // ------------------------------------------------------------ result
  int total_checks, total_failures;

  function automatic void sum();
    total_checks = 0;
    total_failures = 0;
    for (int b = 0; b < NB; b++) begin
      total_checks += checks[b];
      total_failures += failures[b];
    end
  endfunction

  initial begin
    slow_link = 7'b110_0011;
    #(1.0);
    wait (&done);
    sum();
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures);
    $finish;
  end

  initial begin
    #(4.0 * T_RUN + 100000.0);
    sum();
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", total_checks, total_failures + 1);
    $finish;
  end
endmodule
