// tb_gnn_workloads: runs the accelerator at the two Table-1 configurations of
// the resource-optimized design that the default-size test does not cover,
// each with the 16 lanes and 14-bit data of the defaults:
//   small   28 nodes, 56 edges, RF = 1
//   rf8     448 nodes, 896 edges, RF = 8
// Each instance gets three graphs back to back with no input gaps and no
// output back-pressure, so the measured graph-to-graph interval is the
// pipeline's own. Every edge score is checked, and the interval and the
// first-output latency are checked against the bounds that follow from this
// design's stage timing (see gnn_run). The HLS build the design follows
// reports (latency, interval) = (79, 28) and (1590, 520) cycles for these two
// points; this RTL schedules differently and is not expected to match them.
module tb_gnn_workloads;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  localparam int WATCHDOG = 60000;
  logic [1:0] done;
  int checks [2];
  int failures [2];
  int wd_fail = 0;

  gnn_run #(.NAME("small"), .NN(28), .NE(56), .PF(16), .RF(1), .NG(3))
    u_small (.clk, .rst_n_in(rst_n), .done(done[0]), .checks(checks[0]), .failures(failures[0]));

  gnn_run #(.NAME("rf8"), .NN(448), .NE(896), .PF(16), .RF(8), .NG(3))
    u_rf8 (.clk, .rst_n_in(rst_n), .done(done[1]), .checks(checks[1]), .failures(failures[1]));

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1] + 1);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done == 2'b11);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1], failures[0] + failures[1]);
    $finish;
  end
endmodule
