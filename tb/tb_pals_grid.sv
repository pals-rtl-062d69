// tb_pals_grid -- a W x W grid of PALS nodes, each with four neighbour slots.
//
// In a grid every node measures up to four neighbours, which share the taps
// of the node's ring and have their own flip-flop banks in it; pals_node
// with N = 4 is that node.  This testbench wires W x W of them (slot 0
// west, 1 east, 2 north, 3 south; border slots get no clock and the
// zero-offset word) and starts every oscillator at a random time in
// [0, 2 kappa), i.e. with local skews below the 2 kappa bound.  It runs
// T_RUN, records every rising clock edge and, 100 ps later, the node's mode
// and the four words its control module sees, and then checks from the
// edge times alone:
//   - each word against the true offset of that neighbour and the
//     thresholds +-(2i-1)kappa - delta (skipped within 0.01 ps of one),
//   - the mode against the fast trigger on the predicted words,
//   - the fast and slow conditions on the true offsets,
//   - every period between T/((1+mu)(1+rho)) and T,
//   - the local skew over all grid edges at every recorded edge, which must
//     stay within 2 kappa, and the global skew within mu kappa D/(mu - 2 rho)
//     with D = 2(W - 1).
// The skew bounds of the design were worked out for grids up to W = 32
// (diameter 62, local skew still 2 kappa = 20 ps).  This testbench uses
// W = 16 (diameter 30, 256 nodes, 200 ns): the simulation time grows faster
// than the node count (40 s for 16 x 16, against 0.1 s for 4 x 4), and a
// 32 x 32 run would take about ten minutes.  The drift of each node follows
// the same fixed pattern as in the line.
module tb_pals_grid;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned W     = 16;
  localparam int unsigned NN    = W * W;
  localparam int unsigned L     = ELL;
  localparam real         T_RUN = 200000.0;
  localparam int          K     = int'(T_RUN / T_CLK_PS) + 20;
  localparam real         EPS   = 0.01;
  localparam real         TOL   = 0.002;
  localparam logic [2*L-1:0] ZERO_OFFSET = {{L{1'b1}}, {L{1'b0}}};

  logic                         rst_n;
  logic [NN-1:0]                en, clk, md;
  logic [NN-1:0][3:0][2*L-1:0]  q_out, q_in;
  logic [NN-1:0][3:0]           clk_nbr;

  // neighbour of node n in direction d (0 west, 1 east, 2 north, 3 south),
  // -1 at the border
  function automatic int nbr(int n, int d);
    int x, y;
    x = n % int'(W);
    y = n / int'(W);
    case (d)
      0: return (x == 0) ? -1 : n - 1;
      1: return (x == int'(W) - 1) ? -1 : n + 1;
      2: return (y == 0) ? -1 : n - int'(W);
      default: return (y == int'(W) - 1) ? -1 : n + int'(W);
    endcase
  endfunction

  for (genvar n = 0; n < NN; n++) begin : g_node
    for (genvar d = 0; d < 4; d++) begin : g_slot
      localparam int M = nbr(n, d);
      if (M < 0) begin : g_border
        assign clk_nbr[n][d] = 1'b0;
        assign q_in[n][d]    = ZERO_OFFSET;
      end else begin : g_link
        assign clk_nbr[n][d] = clk[M];
        assign q_in[n][d]    = q_out[M][d ^ 1];
      end
    end
    pals_node #(.N(4), .DRIFT(node_drift(n, RHO))) u_node (
      .rst_n(rst_n), .en(en[n]), .clk_nbr(clk_nbr[n]), .q_in(q_in[n]),
      .clk(clk[n]), .md(md[n]), .q_out(q_out[n])
    );
  end

  // ------------------------------------------------------------ recording
  real            t_edge [NN][K];
  logic           md_rec [NN][K];
  logic [2*L-1:0] q_rec  [NN][K][4];
  int             cnt    [NN];
  logic           rec_on;

  for (genvar n = 0; n < NN; n++) begin : g_rec
    always @(posedge clk[n]) begin : rec
      int k;
      if (rec_on && cnt[n] < K) begin
        k = cnt[n];
        t_edge[n][k] = $realtime;
        cnt[n] = k + 1;
        #(100.0);
        md_rec[n][k] = md[n];
        for (int d = 0; d < 4; d++) q_rec[n][k][d] = q_in[n][d];
      end
    end
  end

  // ------------------------------------------------------------ checking
  int checks = 0, failures = 0;
  int n_fast = 0, n_slow = 0, n_to_fast = 0, n_to_slow = 0;

  function automatic void fail(string msg);
    failures++;
    if (failures <= 20) $display("FAIL %s", msg);
  endfunction

  function automatic logic [2*L-1:0] word_of(real o, ref logic near);
    logic [2*L-1:0] w;
    real th;
    for (int unsigned i = 1; i <= L; i++) begin
      th = real'(2 * i - 1) * KAPPA_PS;
      w[qpos(L, i)] = (o >= -th - DELTA_PS);
      w[qneg(L, i)] = (o >= th - DELTA_PS);
      if ((o + th + DELTA_PS) ** 2 < EPS ** 2 || (o - th + DELTA_PS) ** 2 < EPS ** 2) near = 1'b1;
    end
    return w;
  endfunction

  task automatic analyse();
    int kmax, m;
    real o, o_min, o_max, p, ls, gs, lo, hi, ls_max, ls_first, gs_last;
    logic near;
    logic [2*L-1:0] w;
    logic [L-1:0] qmin, qmax;
    logic fc, sc;
    kmax = K;
    for (int n = 0; n < int'(NN); n++) if (cnt[n] < kmax) kmax = cnt[n];
    ls_max = 0.0;
    for (int k = 2; k < kmax; k++) begin
      ls = 0.0;
      lo = t_edge[0][k];
      hi = t_edge[0][k];
      for (int v = 0; v < int'(NN); v++) begin
        near = 1'b0;
        o_min = 0.0;
        o_max = 0.0;
        qmin = '1;
        qmax = '0;
        for (int d = 0; d < 4; d++) begin
          m = nbr(v, d);
          o = (m < 0) ? 0.0 : t_edge[v][k] - t_edge[m][k];
          if (o < o_min) o_min = o;
          if (o > o_max) o_max = o;
          if (-o > ls) ls = -o;
          w = word_of(o, near);
          for (int unsigned i = 1; i <= L; i++) begin
            qmin[i-1] &= w[qpos(L, i)];
            qmax[i-1] |= w[qneg(L, i)];
          end
          if (!near) begin
            checks++;
            if (q_rec[v][k][d] !== w)
              fail($sformatf("node %0d edge %0d slot %0d: word %b, expected %b (offset %0.3f)",
                             v, k, d, q_rec[v][k][d], w, o));
          end
        end
        if (!near) begin
          checks++;
          if (md_rec[v][k] !== |(qmin & qmax))
            fail($sformatf("node %0d edge %0d: mode %b expected %b", v, k, md_rec[v][k], |(qmin & qmax)));
        end
        fc = 1'b0;
        sc = 1'b0;
        for (int s = 0; s < int'(L); s++) begin
          if (o_max >= real'(2 * s + 1) * KAPPA_PS && o_min >= -real'(2 * s + 1) * KAPPA_PS) fc = 1'b1;
          if (o_min <= -real'(2 * s) * KAPPA_PS && o_max <= real'(2 * s) * KAPPA_PS) sc = 1'b1;
        end
        if (fc) begin
          checks++;
          if (md_rec[v][k] !== 1'b1) fail($sformatf("node %0d edge %0d: fast condition but slow", v, k));
        end
        if (sc) begin
          checks++;
          if (md_rec[v][k] !== 1'b0) fail($sformatf("node %0d edge %0d: slow condition but fast", v, k));
        end
        p = t_edge[v][k] - t_edge[v][k-1];
        checks++;
        if (p > T_CLK_PS + TOL || p < T_CLK_PS / ((1.0 + MU) * (1.0 + RHO)) - TOL)
          fail($sformatf("node %0d edge %0d: period %0.4f ps", v, k, p));
        if (md_rec[v][k]) n_fast++; else n_slow++;
        if (md_rec[v][k] && !md_rec[v][k-1]) n_to_fast++;
        if (!md_rec[v][k] && md_rec[v][k-1]) n_to_slow++;
        if (t_edge[v][k] < lo) lo = t_edge[v][k];
        if (t_edge[v][k] > hi) hi = t_edge[v][k];
      end
      gs = hi - lo;
      if (k == 2) ls_first = ls;
      if (ls > ls_max) ls_max = ls;
      gs_last = gs;
      checks++;
      if (ls > 2.0 * KAPPA_PS) fail($sformatf("edge %0d: local skew %0.2f ps", k, ls));
      checks++;
      if (gs > MU * KAPPA_PS * real'(2 * (W - 1)) / (MU - 2.0 * RHO))
        fail($sformatf("edge %0d: global skew %0.2f ps", k, gs));
    end
    $display("grid %0dx%0d: edges %0d, local skew at start %0.2f ps, largest %0.2f ps, global at end %0.2f ps",
             W, W, kmax, ls_first, ls_max, gs_last);
    $display("grid mechanisms: slow %0d, fast %0d, to fast %0d, to slow %0d", n_slow, n_fast, n_to_fast, n_to_slow);
    checks++;
    if (kmax < K - 30) fail($sformatf("only %0d edges", kmax));
    checks++;
    if (n_fast == 0 || n_to_fast == 0 || n_to_slow == 0) fail("mode switches missing");
  endtask

  initial begin
    rst_n = 1'b1;
    en = '0;
    rec_on = 1'b0;
    for (int n = 0; n < int'(NN); n++) cnt[n] = 0;
    #(100.0);
    rst_n = 1'b0;
    #(10.0);
    rst_n = 1'b1;
    rec_on = 1'b1;
    for (int n = 0; n < int'(NN); n++) begin
      fork
        automatic int nn = n;
        automatic real st = 2.0 * KAPPA_PS * real'($urandom_range(999)) / 1000.0;
        begin
          #(st);
          en[nn] = 1'b1;
        end
      join_none
    end
    #(T_RUN);
    rec_on = 1'b0;
    #(200.0);
    analyse();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T_RUN + 100000.0);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
