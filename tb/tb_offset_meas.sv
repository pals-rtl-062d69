// tb_offset_meas -- checks the measurement flip-flop bank: the reset value
// is the zero-offset word 1^L 0^L, the word changes only at rising edges of
// the measuring clock and then equals the taps present at that edge.  Taps
// are driven with random thermometer codes, and change between clock edges.
module tb_offset_meas;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned L = ELL;

  int checks = 0, failures = 0;

  logic clk_meas = 1'b0, rst_n = 1'b1;
  logic [2*L-1:0] tap = '0, q;

  offset_meas dut (.clk_meas(clk_meas), .rst_n(rst_n), .tap(tap), .q(q));

  function automatic logic [2*L-1:0] thermo(int unsigned ones);
    logic [2*L-1:0] w = '0;
    for (int unsigned b = 0; b < ones; b++) w[2*L-1-b] = 1'b1;
    return w;
  endfunction

  task automatic check_q(string what, logic [2*L-1:0] want);
    checks++;
    if (q !== want) begin
      failures++;
      $display("FAIL %s: q=%b expected %b", what, q, want);
    end
  endtask

  logic [2*L-1:0] sampled;

  initial begin
    tap = thermo(0);
    #(10.0);
    rst_n = 1'b0;
    #(100.0);
    check_q("reset value", {{L{1'b1}}, {L{1'b0}}});
    rst_n = 1'b1;
    #(100.0);
    check_q("hold after reset", {{L{1'b1}}, {L{1'b0}}});
    for (int n = 0; n < 200; n++) begin
      tap = thermo($urandom_range(2 * L, 0));
      #(50.0);
      sampled = tap;
      clk_meas = 1'b1;
      #(10.0);
      check_q("snapshot", sampled);
      // taps move while the clock is high and while it is low
      tap = thermo($urandom_range(2 * L, 0));
      #(100.0);
      check_q("hold while high", sampled);
      clk_meas = 1'b0;
      tap = thermo($urandom_range(2 * L, 0));
      #(100.0);
      check_q("hold while low", sampled);
    end
    // asynchronous reset without a clock
    tap = thermo(2 * L);
    clk_meas = 1'b1;
    #(10.0);
    clk_meas = 1'b0;
    #(10.0);
    rst_n = 1'b0;
    #(1.0);
    check_q("async reset", {{L{1'b1}}, {L{1'b0}}});
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
