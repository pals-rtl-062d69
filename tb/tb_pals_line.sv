// tb_pals_line -- end-to-end test of the line of nodes at its default size
// (4 nodes, no parameter changed).
//
// Three start-up scenarios, each run for 1000 ns (about 2000 clock cycles):
//   ahead    node 1 starts 40 ps before the others,
//   behind   node 1 starts 40 ps after the others,
//   gradient 105 ps of global skew spread over the edges (35 ps each).
// line_bench drives the enables, records every clock edge and the words and
// modes after it, and checks the words, the modes, the fast and slow
// conditions, the clock periods and the final local (<= 20 ps) and global
// skew against values worked out from the edge times; it also requires
// every mechanism (both modes, both switches, level-1 and level-2 triggers,
// a node held slow by a lagging neighbour) to have happened.
module tb_pals_line;
  timeunit 1ps;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int unsigned NODES = LINE_NODES;
  localparam int unsigned L     = ELL;
  localparam real         T_RUN = 1000000.0;

  logic                      rst_n;
  logic [NODES-1:0]          en;
  logic [NODES-1:0]          clk, md;
  logic [NODES-1:0][2*L-1:0] q_left, q_right;
  logic                      done;
  int                        checks, failures;

  pals_line dut (
    .rst_n(rst_n), .en(en), .clk(clk), .md(md), .q_left(q_left), .q_right(q_right)
  );

  line_bench #(.NAME("line4"), .NODES(NODES), .T_RUN(T_RUN)) bench (
    .rst_n(rst_n), .en(en), .clk(clk), .md(md), .q_left(q_left), .q_right(q_right),
    .done(done), .checks(checks), .failures(failures)
  );

  initial begin
    #(1.0);
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(3.0 * T_RUN + 100000.0);
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
