// tb_graph_unloader: a small buffer (11 edges, 4 lanes) holds two graphs;
// the unloader streams them out while the consumer throttles w_ready at
// random. Checks beat order and data, w_lanes on the partial last beat,
// w_last, the release of each bank, and full rate (one beat per cycle) when
// w_ready stays high.
module tb_graph_unloader;
  localparam int NE = 11, PF = 4, W = 14, NB = (NE + PF - 1) / PF;
  localparam int EWAW = $clog2(NB + 1), ERAW = $clog2(NE + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic p_ready, p_commit, we, c_valid, c_release;
  logic [EWAW-1:0] waddr;
  logic [PF-1:0][W-1:0] wdata, w_data, rdata;
  logic [PF-1:0][ERAW-1:0] raddr;
  logic w_valid, w_ready, w_last;
  logic [PF-1:0] w_lanes;

  pp_buffer #(.ROWS(NE), .ROW_W(W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_buf (
    .clk, .rst_n, .p_ready, .p_commit, .we, .waddr, .wdata,
    .c_valid, .c_release, .raddr, .rdata);
  graph_unloader #(.N_EDGES(NE), .PF(PF), .W(W)) dut (
    .clk, .rst_n, .c_valid, .c_release, .raddr, .rdata,
    .w_valid, .w_ready, .w_data, .w_lanes, .w_last);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int beats = 0, graphs = 0, first_cyc = -1, cyc = 0, throttle = 1;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && w_valid && w_ready) begin
    int g, b;
    g = beats / NB; b = beats % NB;
    for (int l = 0; l < PF; l++) begin
      check(w_lanes[l] == (b * PF + l < NE), "lane mask");
      if (b * PF + l < NE) check(w_data[l] == W'(g * 100 + b * PF + l), $sformatf("graph %0d edge %0d", g, b * PF + l));
    end
    check(w_last == (b == NB - 1), "w_last");
    check(c_release == w_last, "release with last beat");
    if (g == 2 && b == 0) first_cyc = cyc;
    if (g == 2 && b == NB - 1) check(cyc - first_cyc == NB - 1, "full rate with w_ready high");
    beats++;
  end

  always @(negedge clk) w_ready <= throttle ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic fill(input int g);
    wait (rst_n && p_ready);
    @(negedge clk);
    for (int b = 0; b < NB; b++) begin
      we = 1'b1; waddr = EWAW'(b); p_commit = (b == NB - 1);
      for (int l = 0; l < PF; l++) wdata[l] = W'(g * 100 + b * PF + l);
      @(negedge clk);
    end
    we = 1'b0; p_commit = 1'b0;
  endtask

  initial begin
    we = 0; p_commit = 0; waddr = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    fill(0);
    fill(1);
    wait (beats == 2 * NB);
    throttle = 0;
    fill(2);
    wait (beats == 3 * NB);
    repeat (3) @(negedge clk);
    check(!c_valid && !w_valid, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
