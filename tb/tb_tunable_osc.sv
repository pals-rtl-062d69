// tb_tunable_osc -- checks the oscillator model: start/stop with en, the
// slow and fast periods (2 GHz and 2 GHz * (1 + mu)), the response to a mode
// change within half a period, the period of a drifting instance, and the
// positions of the measurement taps relative to the clock edge
// (Q^i at -(2i-1)*kappa - delta, Q^-i at +(2i-1)*kappa - delta).
module tb_tunable_osc;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned L = ELL;
  localparam real TOL = 0.002;  // ps; delays are rounded to 1 fs

  int checks = 0, failures = 0;

  logic en = 1'b0, md = 1'b0;
  logic clk, clk_d;
  logic [2*L-1:0] tap, tap_d;

  tunable_osc dut (.en(en), .md(md), .clk(clk), .tap(tap));
  tunable_osc #(.DRIFT(RHO)) dut_drift (.en(en), .md(1'b0), .clk(clk_d), .tap(tap_d));

  real t_clk = 0.0, t_prev = 0.0, t_clk_d = 0.0, t_prev_d = 0.0;
  real t_tap [2*L];
  int  n_edges = 0;

  always @(posedge clk) begin
    t_prev = t_clk;
    t_clk  = $realtime;
    n_edges++;
  end
  always @(posedge clk_d) begin
    t_prev_d = t_clk_d;
    t_clk_d  = $realtime;
  end
  for (genvar k = 0; k < 2 * L; k++) begin : g_tap
    always @(posedge tap[k]) t_tap[k] = $realtime;
  end

  function automatic void check_near(string what, real got, real want);
    checks++;
    if (got > want + TOL || got < want - TOL) begin
      failures++;
      $display("FAIL %s: got %0.4f ps, expected %0.4f ps", what, got, want);
    end
  endfunction

  function automatic void check_bit(string what, logic got, logic want);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s: got %b, expected %b", what, got, want);
    end
  endfunction

  // one full period after the next rising edge
  task automatic period(output real p);
    @(posedge clk);
    @(posedge clk);
    #(1.0);
    p = t_clk - t_prev;
  endtask

  real p, p_fast, t_md;  // t_md: time of the mode change, for the log

  initial begin
    #(5000.0);
    // at rest while en is low
    check_bit("clk at rest", clk, 1'b0);
    check_bit("taps at rest", |tap, 1'b0);
    en = 1'b1;
    @(posedge clk);
    #(1.0);
    // first edge: half period + ring delay to the clock output
    check_near("first edge", t_clk - 5000.0,
               T_CLK_PS / 2.0 + real'(2 * L - 1) * KAPPA_PS + DELTA_PS);
    // slow mode
    repeat (3) begin
      period(p);
      check_near("slow period", p, T_CLK_PS);
    end
    // tap positions, taken after an edge has fully propagated
    repeat (2) begin
      @(posedge clk);
      #(100.0);
      for (int unsigned i = 1; i <= L; i++) begin
        check_near($sformatf("tap Q^%0d", i), t_tap[qpos(L, i)] - t_clk,
                   -(real'(2 * i - 1) * KAPPA_PS) - DELTA_PS);
        check_near($sformatf("tap Q^-%0d", i), t_tap[qneg(L, i)] - t_clk,
                   real'(2 * i - 1) * KAPPA_PS - DELTA_PS);
      end
    end
    // switch to fast mode; the new rate applies within half a period
    @(posedge clk);
    #(10.0);
    md = 1'b1;
    t_md = $realtime;
    @(posedge clk);
    #(1.0);
    // the half period in progress when md rose still runs slow,
    // the following one is already fast
    check_near("transition period", t_clk - t_prev,
               T_CLK_PS / 2.0 + T_CLK_PS / 2.0 / (1.0 + MU));
    repeat (3) begin
      period(p_fast);
      check_near("fast period", p_fast, T_CLK_PS / (1.0 + MU));
    end
    checks++;
    if (!(p_fast < T_CLK_PS)) begin
      failures++;
      $display("FAIL fast mode is not faster");
    end
    // back to slow
    md = 1'b0;
    @(posedge clk);
    period(p);
    check_near("slow period again", p, T_CLK_PS);
    // drifting instance: rate 1 + rho
    check_near("drift period", t_clk_d - t_prev_d, T_CLK_PS / (1.0 + RHO));
    // stop
    en = 1'b0;
    #(2000.0);
    check_bit("clk stopped", clk, 1'b0);
    check_bit("taps stopped", |tap, 1'b0);
    begin
      int e0;
      e0 = n_edges;
      #(3000.0);
      checks++;
      if (n_edges != e0) begin
        failures++;
        $display("FAIL oscillator still running with en low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200000.0);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
