// tb_pals_node -- one node with three neighbours.  The neighbours' clocks
// are copies of the node's clock shifted by chosen offsets, so each
// measurement word the node produces for a neighbour (q_out) can be
// predicted from the offset and the thresholds.  The measurement words the
// node receives (q_in) are random thermometer codes; the expected mode is
// worked out from the number of ones in each word (a count, not gates), and
// the node's clock period is checked to follow the mode.
module tb_pals_node;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned L = ELL;
  localparam int unsigned N = NBR;
  localparam real TOL = 0.002;

  int checks = 0, failures = 0;
  int n_fast = 0, n_slow = 0;

  logic rst_n = 1'b1, en = 1'b0;
  logic [N-1:0] clk_nbr = '0;
  logic [N-1:0][2*L-1:0] q_in, q_out;
  logic clk, md;

  pals_node dut (
    .rst_n(rst_n), .en(en), .clk_nbr(clk_nbr), .q_in(q_in),
    .clk(clk), .md(md), .q_out(q_out)
  );

  // neighbour k's clock lags this node's clock by lag[k] (0 < lag < period)
  // (paused while the offsets change, so that no shortened pulse appears)
  real lag [N];
  logic nbr_run = 1'b0;
  for (genvar k = 0; k < N; k++) begin : g_nbr
    always @(posedge clk) begin
      if (nbr_run) begin
        fork
          begin
            real d;
            d = lag[k];
            #(d);
            clk_nbr[k] = 1'b1;
            #(T_CLK_PS / 2.0);
            clk_nbr[k] = 1'b0;
          end
        join_none
      end
    end
  end

  real t_clk = 0.0, t_prev = 0.0;
  always @(posedge clk) begin
    t_prev = t_clk;
    t_clk  = $realtime;
  end

  function automatic logic [2*L-1:0] thermo(int unsigned ones);
    logic [2*L-1:0] w = '0;
    for (int unsigned b = 0; b < ones; b++) w[2*L-1-b] = 1'b1;
    return w;
  endfunction

  // expected word of this node as seen by a neighbour lagging by lg:
  // the neighbour samples lg after our edge, i.e. our offset is lg
  // (or lg - period when the neighbour is in fact ahead)
  function automatic logic [2*L-1:0] expect_word(real lg);
    real o;
    logic [2*L-1:0] w;
    o = (lg > T_CLK_PS / 2.0) ? lg - T_CLK_PS : lg;
    for (int unsigned i = 1; i <= L; i++) begin
      w[L + i - 1] = (o >= -(real'(2 * i - 1) * KAPPA_PS) - DELTA_PS);
      w[L - i]     = (o >= real'(2 * i - 1) * KAPPA_PS - DELTA_PS);
    end
    return w;
  endfunction

  // an offset in [-45, 45] ps at least 1 ps away from every threshold
  function automatic real pick_offset();
    real o;
    logic ok;
    do begin
      o = real'($urandom_range(900, 0)) / 10.0 - 45.0;
      ok = 1'b1;
      for (int unsigned i = 1; i <= L; i++) begin
        real th;
        th = real'(2 * i - 1) * KAPPA_PS;
        if ((o - (-th - DELTA_PS)) ** 2 < 1.0 || (o - (th - DELTA_PS)) ** 2 < 1.0) ok = 1'b0;
      end
    end while (!ok);
    return o;
  endfunction

  int unsigned ones [N];
  int unsigned cmin, cmax;
  logic want_md;
  real o;

  initial begin
    for (int k = 0; k < int'(N); k++) lag[k] = 100.0;
    q_in = '0;
    #(10.0);
    rst_n = 1'b0;
    #(10.0);
    rst_n = 1'b1;
    en = 1'b1;
    for (int round = 0; round < 60; round++) begin
      // new offsets for the neighbours and new words from them
      nbr_run = 1'b0;
      repeat (2) @(posedge clk);
      for (int k = 0; k < int'(N); k++) begin
        o = pick_offset();
        lag[k] = (o < 0.0) ? o + T_CLK_PS : o;
        if (lag[k] < 1.0) lag[k] = 1.0;
        ones[k] = $urandom_range(2 * L, 0);
        q_in[k] = thermo(ones[k]);
      end
      cmin = 2 * L;
      cmax = 0;
      for (int k = 0; k < int'(N); k++) begin
        if (ones[k] < cmin) cmin = ones[k];
        if (ones[k] > cmax) cmax = ones[k];
      end
      // fast iff some level i: smallest word still has Q^i (cmin >= L-i+1)
      // and largest word has Q^-i (cmax >= L+i)
      want_md = 1'b0;
      for (int unsigned i = 1; i <= L; i++)
        if (cmin >= L - i + 1 && cmax >= L + i) want_md = 1'b1;
      #(1.0);
      checks++;
      if (md !== want_md) begin
        failures++;
        $display("FAIL round %0d: q_in=%h md=%b expected %b", round, q_in, md, want_md);
      end
      if (want_md) n_fast++; else n_slow++;
      // let the neighbour clocks settle on the new offsets and sample
      nbr_run = 1'b1;
      repeat (3) @(posedge clk);
      #(1.0);
      checks++;
      if (t_clk - t_prev > (want_md ? T_CLK_PS / (1.0 + MU) : T_CLK_PS) + TOL ||
          t_clk - t_prev < (want_md ? T_CLK_PS / (1.0 + MU) : T_CLK_PS) - TOL) begin
        failures++;
        $display("FAIL round %0d: period %0.4f ps with md=%b", round, t_clk - t_prev, md);
      end
      repeat (2) @(posedge clk);
      #(T_CLK_PS / 2.0 - 10.0);  // well after every neighbour edge
      for (int k = 0; k < int'(N); k++) begin
        checks++;
        if (q_out[k] !== expect_word(lag[k])) begin
          failures++;
          $display("FAIL round %0d nbr %0d: lag %0.1f q_out=%b expected %b",
                   round, k, lag[k], q_out[k], expect_word(lag[k]));
        end
      end
    end
    checks++;
    if (n_fast == 0 || n_slow == 0) begin
      failures++;
      $display("FAIL only one mode exercised (fast %0d, slow %0d)", n_fast, n_slow);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(1000000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
