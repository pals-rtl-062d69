// tb_gcs_minmax -- exhaustive check of the min/max reduction for three
// neighbours and two thresholds (all 4096 input combinations).  The
// reference works per threshold level: the minimum has Q^i when no
// neighbour lacks it, the maximum has Q^-i when at least one neighbour
// has it (counted, not reduced with gates).
module tb_gcs_minmax;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned L = ELL;
  localparam int unsigned N = NBR;

  int checks = 0, failures = 0;

  logic [N-1:0][2*L-1:0] q_w;
  logic [L-1:0] q_min, q_max;

  gcs_minmax dut (.q_w(q_w), .q_min(q_min), .q_max(q_max));

  initial begin
    for (int unsigned v = 0; v < (1 << (2 * L * N)); v++) begin
      q_w = (2*L*N)'(v);
      #(1.0);
      for (int unsigned i = 1; i <= L; i++) begin
        int lacking, having;
        lacking = 0;
        having  = 0;
        for (int unsigned k = 0; k < N; k++) begin
          if (q_w[k][L + i - 1] == 1'b0) lacking++;
          if (q_w[k][L - i] == 1'b1) having++;
        end
        checks++;
        if (q_min[i-1] !== (lacking == 0) || q_max[i-1] !== (having > 0)) begin
          failures++;
          if (failures < 10)
            $display("FAIL q_w=%b level %0d: min=%b max=%b", q_w, i, q_min[i-1], q_max[i-1]);
        end
      end
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
