// tb_gcs_mode -- checks the fast trigger.  First all input combinations
// against the rule "fast iff some level i has both Q^i_min and Q^-i_max".
// Then random pairs of numeric offset estimates (o_min <= o_max, in ps):
// their unary codes are formed with the thresholds of the design and the
// mode is compared with the fast trigger of the offset-based algorithm,
// exists s: o_max >= (2s+1)kappa - delta and o_min >= -(2s+1)kappa - delta.
module tb_gcs_mode;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned L = ELL;

  int checks = 0, failures = 0;
  int n_fast = 0, n_slow = 0;

  logic [L-1:0] q_min, q_max;
  logic md;

  gcs_mode dut (.q_min(q_min), .q_max(q_max), .md(md));

  real o_min, o_max, a, b;
  logic ft;

  initial begin
    for (int unsigned v = 0; v < (1 << (2 * L)); v++) begin
      {q_min, q_max} = (2*L)'(v);
      #(1.0);
      ft = 1'b0;
      for (int unsigned i = 0; i < L; i++) if (q_min[i] && q_max[i]) ft = 1'b1;
      checks++;
      if (md !== ft) begin
        failures++;
        $display("FAIL q_min=%b q_max=%b md=%b", q_min, q_max, md);
      end
    end
    for (int n = 0; n < 2000; n++) begin
      // offsets within the measurable range of L levels, 0.1 ps steps
      a = real'($urandom_range(1000, 0)) / 10.0 - 50.0;
      b = real'($urandom_range(1000, 0)) / 10.0 - 50.0;
      o_min = (a < b) ? a : b;
      o_max = (a < b) ? b : a;
      for (int unsigned i = 1; i <= L; i++) begin
        q_min[i-1] = (o_min >= -(real'(2 * i - 1) * KAPPA_PS) - DELTA_PS);
        q_max[i-1] = (o_max >= real'(2 * i - 1) * KAPPA_PS - DELTA_PS);
      end
      ft = 1'b0;
      for (int s = 0; s < int'(L); s++)
        if (o_max >= real'(2 * s + 1) * KAPPA_PS - DELTA_PS &&
            o_min >= -(real'(2 * s + 1) * KAPPA_PS) - DELTA_PS) ft = 1'b1;
      #(1.0);
      checks++;
      if (ft) n_fast++; else n_slow++;
      if (md !== ft) begin
        failures++;
        if (failures < 10)
          $display("FAIL o_min=%0.1f o_max=%0.1f md=%b expected %b", o_min, o_max, md, ft);
      end
    end
    checks++;
    if (n_fast == 0 || n_slow == 0) begin
      failures++;
      $display("FAIL random offsets did not reach both modes");
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
