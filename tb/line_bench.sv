// line_bench -- scenario driver and checker for a line of PALS nodes,
// shared by the line testbenches.
//
// It drives the reset and the per-node enables of a line, runs the selected
// start-up scenarios (SCEN bit 0: ahead, bit 1: behind, bit 2: gradient,
// bit 3: all nodes started together), each for T_RUN, and records the time
// of every rising clock edge and, 100 ps after each edge of a node, the two
// measurement words its control module sees and its mode.  From the edge
// times alone it then works out
//   - the measurement word each node should have seen (true offset against
//     the thresholds +-(2i-1)kappa - delta) and the mode that follows
//     (only when EXACT is set: with wire delays the words are shifted),
//   - the fast and slow conditions on the true offsets (a node satisfying
//     the fast condition must be fast, one satisfying the slow condition
//     slow),
//   - every clock period, which must stay between T/((1+mu)(1+rho)) and T,
//   - the local and global skew, which at the end of each scenario must be
//     within 2*kappa and mu*kappa*D/(mu - 2 rho) respectively.
// In scenario ahead it also checks the order of the mode changes (node 1
// slow and its neighbours fast at the start, node 3 turning fast later,
// nodes 0 and 2 falling back to slow).
// It counts how often each mechanism happened (slow and fast cycles,
// switches both ways, a fast trigger at level 1 and at level 2, a node held
// slow although a neighbour was ahead); with MECH set each must happen.
// When done, checks and failures hold its totals.
module line_bench import pals_pkg::*; #(
  parameter string       NAME   = "line",
  parameter int unsigned NODES  = LINE_NODES,
  parameter int unsigned L      = ELL,
  parameter real         T_CLK  = T_CLK_PS,
  parameter real         KAPPA  = KAPPA_PS,
  parameter real         DELTA  = DELTA_PS,
  parameter real         T_RUN  = 1000000.0,  // per scenario, ps
  parameter bit [3:0]    SCEN   = 4'b0111,
  parameter bit          EXACT  = 1'b1,
  parameter bit          MECH   = 1'b1
) (
  output logic                      rst_n,
  output logic [NODES-1:0]          en,
  input  logic [NODES-1:0]          clk,
  input  logic [NODES-1:0]          md,
  input  logic [NODES-1:0][2*L-1:0] q_left,
  input  logic [NODES-1:0][2*L-1:0] q_right,
  output logic                      done,
  output int                        checks,
  output int                        failures
);
  timeunit 1ps;
  timeprecision 1fs;

  localparam int  K   = int'(T_RUN / T_CLK) + 100;  // edges recorded per node
  localparam real EPS = 0.01;   // ps around a threshold left unchecked
  localparam real TOL = 0.002;

  // ------------------------------------------------------------ recording
  real            t_edge [NODES][K];
  logic           md_rec [NODES][K];
  logic [2*L-1:0] ql_rec [NODES][K];
  logic [2*L-1:0] qr_rec [NODES][K];
  int             cnt    [NODES];
  logic           rec_on = 1'b0;

  for (genvar n = 0; n < NODES; n++) begin : g_rec
    always @(posedge clk[n]) begin : rec
      int k;
      if (rec_on && cnt[n] < K) begin
        k = cnt[n];
        t_edge[n][k] = $realtime;
        cnt[n] = k + 1;
        #(100.0);
        md_rec[n][k] = md[n];
        ql_rec[n][k] = q_left[n];
        qr_rec[n][k] = q_right[n];
      end
    end
  end

  // ------------------------------------------------------------ mechanisms
  int n_slow = 0, n_fast = 0, n_to_fast = 0, n_to_slow = 0;
  int n_lvl1 = 0, n_lvl2 = 0, n_held = 0;

  // ------------------------------------------------------------ helpers
  function automatic void fail(string msg);
    failures++;
    if (failures <= 20) $display("FAIL %s: %s", NAME, msg);
  endfunction

  // expected word for true offset o (neighbour minus node, ps); sets near
  // when o lies within EPS of a threshold
  function automatic logic [2*L-1:0] word_of(real o, ref logic near);
    logic [2*L-1:0] w;
    real th;
    for (int unsigned i = 1; i <= L; i++) begin
      th = real'(2 * i - 1) * KAPPA;
      w[L + i - 1] = (o >= -th - DELTA);
      w[L - i]     = (o >= th - DELTA);
      if ((o + th + DELTA) ** 2 < EPS ** 2 || (o - th + DELTA) ** 2 < EPS ** 2) near = 1'b1;
    end
    return w;
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  real ls_first, ls_last, gs_last;

  // local and global skew at edge k
  function automatic void skews(int k, output real ls, output real gs);
    real lo, hi;
    ls = 0.0;
    lo = t_edge[0][k];
    hi = t_edge[0][k];
    for (int n = 1; n < int'(NODES); n++) begin
      if (absr(t_edge[n][k] - t_edge[n-1][k]) > ls) ls = absr(t_edge[n][k] - t_edge[n-1][k]);
      if (t_edge[n][k] < lo) lo = t_edge[n][k];
      if (t_edge[n][k] > hi) hi = t_edge[n][k];
    end
    gs = hi - lo;
  endfunction

  task automatic analyse(string name);
    int kmax;
    real ls, gs, o_l, o_r, o_min, o_max, p;
    logic near;
    logic [2*L-1:0] wl, wr;
    logic [L-1:0] qmin, qmax;
    logic want, fc, sc;
    kmax = K;
    for (int n = 0; n < int'(NODES); n++) if (cnt[n] < kmax) kmax = cnt[n];
    for (int k = 2; k < kmax; k++) begin
      for (int v = 0; v < int'(NODES); v++) begin
        // true offsets of the neighbours (ahead is positive)
        near = 1'b0;
        o_l = (v == 0) ? 0.0 : t_edge[v][k] - t_edge[v-1][k];
        o_r = (v == int'(NODES) - 1) ? 0.0 : t_edge[v][k] - t_edge[v+1][k];
        wl = word_of(o_l, near);
        wr = word_of(o_r, near);
        if (EXACT && !near) begin
          checks++;
          if (ql_rec[v][k] !== wl || qr_rec[v][k] !== wr)
            fail($sformatf("%s node %0d edge %0d: words %b %b, expected %b %b (offsets %0.3f %0.3f)",
                           name, v, k, ql_rec[v][k], qr_rec[v][k], wl, wr, o_l, o_r));
          for (int unsigned i = 1; i <= L; i++) begin
            qmin[i-1] = wl[L + i - 1] & wr[L + i - 1];
            qmax[i-1] = wl[L - i] | wr[L - i];
          end
          want = |(qmin & qmax);
          checks++;
          if (md_rec[v][k] !== want)
            fail($sformatf("%s node %0d edge %0d: mode %b expected %b", name, v, k, md_rec[v][k], want));
        end
        // fast and slow conditions on the true offsets (self offset 0 included)
        o_min = 0.0;
        o_max = 0.0;
        if (o_l < o_min) o_min = o_l;
        if (o_r < o_min) o_min = o_r;
        if (o_l > o_max) o_max = o_l;
        if (o_r > o_max) o_max = o_r;
        fc = 1'b0;
        sc = 1'b0;
        for (int s = 0; s < int'(L); s++) begin
          if (o_max >= real'(2 * s + 1) * KAPPA && o_min >= -real'(2 * s + 1) * KAPPA) fc = 1'b1;
          if (o_min <= -real'(2 * s) * KAPPA && o_max <= real'(2 * s) * KAPPA) sc = 1'b1;
        end
        if (fc) begin
          checks++;
          if (md_rec[v][k] !== 1'b1) fail($sformatf("%s node %0d edge %0d: fast condition but slow", name, v, k));
        end
        if (sc) begin
          checks++;
          if (md_rec[v][k] !== 1'b0) fail($sformatf("%s node %0d edge %0d: slow condition but fast", name, v, k));
        end
        // rate bounds
        p = t_edge[v][k] - t_edge[v][k-1];
        checks++;
        if (p > T_CLK + TOL || p < T_CLK / ((1.0 + MU) * (1.0 + RHO)) - TOL)
          fail($sformatf("%s node %0d edge %0d: period %0.4f ps", name, v, k, p));
        // mechanisms
        if (md_rec[v][k]) n_fast++; else n_slow++;
        if (md_rec[v][k] && !md_rec[v][k-1]) n_to_fast++;
        if (!md_rec[v][k] && md_rec[v][k-1]) n_to_slow++;
        wl = ql_rec[v][k];
        wr = qr_rec[v][k];
        // level i fires: Q^i_min and Q^-i_max
        if (wl[qpos(L, 1)] & wr[qpos(L, 1)] & (wl[qneg(L, 1)] | wr[qneg(L, 1)])) n_lvl1++;
        if (L >= 2 && (wl[qpos(L, 2)] & wr[qpos(L, 2)] & (wl[qneg(L, 2)] | wr[qneg(L, 2)]))) n_lvl2++;
        // a neighbour ahead by kappa - delta, yet slow
        if (!md_rec[v][k] && (wl[qneg(L, 1)] | wr[qneg(L, 1)])) n_held++;
      end
    end
    skews(2, ls_first, gs);
    $display("%s %s: edges %0d, start local skew %0.2f ps, global %0.2f ps", NAME, name, kmax, ls_first, gs);
    for (int k = 200; k < kmax; k += 200) begin
      skews(k, ls, gs);
      $display("  t=%0.0f ns  local %0.2f ps  global %0.2f ps", t_edge[0][k] / 1000.0, ls, gs);
    end
    // end of the scenario: the last 100 edges
    ls_last = 0.0;
    gs_last = 0.0;
    for (int k = kmax - 100; k < kmax; k++) begin
      skews(k, ls, gs);
      if (ls > ls_last) ls_last = ls;
      if (gs > gs_last) gs_last = gs;
    end
    $display("%s %s: final local skew %0.2f ps, global %0.2f ps", NAME, name, ls_last, gs_last);
    checks++;
    if (ls_last > 2.0 * KAPPA) fail($sformatf("%s: final local skew %0.2f ps", name, ls_last));
    checks++;
    if (gs_last > MU * KAPPA * real'(NODES - 1) / (MU - 2.0 * RHO))
      fail($sformatf("%s: final global skew %0.2f ps", name, gs_last));
    checks++;
    if (kmax < K - 110) fail($sformatf("%s: only %0d edges", name, kmax));
  endtask

  // start the nodes at the given times after a reset
  task automatic run(string name, real start[NODES]);
    en = '0;
    #(2000.0);
    rst_n = 1'b0;
    #(10.0);
    rst_n = 1'b1;
    for (int n = 0; n < int'(NODES); n++) cnt[n] = 0;
    rec_on = 1'b1;
    for (int n = 0; n < int'(NODES); n++) begin
      fork
        automatic int nn = n;
        begin
          #(start[nn]);
          en[nn] = 1'b1;
        end
      join_none
    end
    #(T_RUN);
    rec_on = 1'b0;
    #(200.0);
    analyse(name);
  endtask

  // modes a few cycles after the start (before any node has caught up)
  task automatic check_start_modes(string name, logic [NODES-1:0] want);
    for (int v = 0; v < int'(NODES); v++) begin
      checks++;
      if (md_rec[v][5] !== want[v])
        fail($sformatf("%s: node %0d starts in mode %b, expected %b", name, v, md_rec[v][5], want[v]));
    end
  endtask

  // ahead: the sequence of modes seen in the simulations of the design:
  // node 3 starts slow and turns fast once node 2 has pulled away from it,
  // nodes 0 and 2 later fall back to slow when they reach node 1
  task automatic check_ahead_sequence();
    int k3, k0, k2;
    k3 = -1;
    k0 = -1;
    k2 = -1;
    for (int k = 5; k < K && k < cnt[0]; k++) begin
      if (NODES >= 4 && k3 < 0 && md_rec[3][k]) k3 = k;
      if (k0 < 0 && !md_rec[0][k]) k0 = k;
      if (k2 < 0 && !md_rec[2][k]) k2 = k;
    end
    $display("%s ahead: node 3 first fast at edge %0d, nodes 0 and 2 first slow at edges %0d and %0d",
             NAME, k3, k0, k2);
    if (NODES >= 4) begin
      checks++;
      if (k3 < 0) fail("ahead: node 3 never turned fast");
    end
    checks++;
    if (k0 < 0 || k2 < 0) fail("ahead: nodes 0 and 2 never fell back to slow");
  endtask

  real start [NODES];

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    rst_n = 1'b1;
    en = '0;
    for (int n = 0; n < int'(NODES); n++) cnt[n] = 0;
    if (SCEN[0]) begin
      // ahead: node 1 leads the others by 40 ps (scaled with the delays)
      for (int n = 0; n < int'(NODES); n++) start[n] = (n == 1) ? 0.0 : 4.0 * KAPPA;
      run("ahead", start);
      // node 1 slow, its neighbours fast, the others (further away) slow
      check_start_modes("ahead", NODES'(5));
      check_ahead_sequence();
    end
    if (SCEN[1]) begin
      // behind: node 1 trails the others by 40 ps
      for (int n = 0; n < int'(NODES); n++) start[n] = (n == 1) ? 4.0 * KAPPA : 0.0;
      run("behind", start);
      check_start_modes("behind", NODES'(2));
    end
    if (SCEN[2]) begin
      // gradient: 105 ps of global skew spread evenly over the edges
      // (35 ps per edge on 4 nodes), node 0 leading
      for (int n = 0; n < int'(NODES); n++)
        start[n] = 10.5 * KAPPA * real'(n) / real'(NODES - 1) + ((n % 2 == 1) ? 0.3 : 0.0);
      run("gradient", start);
    end
    if (SCEN[3]) begin
      // together: all nodes started at once
      for (int n = 0; n < int'(NODES); n++) start[n] = 0.0;
      run("together", start);
    end
    $display("%s mechanisms: slow %0d, fast %0d, to fast %0d, to slow %0d, level-1 trigger %0d, level-2 trigger %0d, held slow %0d",
             NAME, n_slow, n_fast, n_to_fast, n_to_slow, n_lvl1, n_lvl2, n_held);
    if (MECH) begin
      checks++; if (n_slow == 0)    fail("slow mode never used");
      checks++; if (n_fast == 0)    fail("fast mode never used");
      checks++; if (n_to_fast == 0) fail("no switch to fast");
      checks++; if (n_to_slow == 0) fail("no switch to slow");
      checks++; if (n_lvl1 == 0)    fail("no level-1 fast trigger");
      checks++; if (n_lvl2 == 0)    fail("no level-2 fast trigger");
      checks++; if (n_held == 0)    fail("never held slow by a lagging neighbour");
    end
    done = 1'b1;
  end
endmodule
