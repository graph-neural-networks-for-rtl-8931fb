// tb_graph_loader: streams three graphs (10 nodes, 13 edges, 4 lanes, so both
// streams end in a partial beat) with random valid gaps and random buffer
// back-pressure. Checks that ready follows the buffers, that every accepted
// beat is written with the right word address and data, and that the commit
// comes with the last beat of each graph and only then.
module tb_graph_loader;
  import gnn_pkg::*;
  localparam int NN = 10, NE = 13, PF = 4, W = 14, NIW = $clog2(NN);
  localparam int NB = (NN + PF - 1) / PF, EB = (NE + PF - 1) / PF;
  localparam int NWAW = $clog2(NB + 1), EWAW = $clog2(EB + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic n_valid, n_ready, e_valid, e_ready;
  logic [PF-1:0][NODE_DIM-1:0][W-1:0] n_data, nd_wdata;
  logic [PF-1:0][EDGE_DIM-1:0][W-1:0] e_attr, ed_attr;
  logic [PF-1:0][1:0][NIW-1:0] e_idx, ed_idx;
  logic nd_p_ready, nd_commit, nd_we, ed_p_ready, ed_commit, ed_we;
  logic [NWAW-1:0] nd_waddr;
  logic [EWAW-1:0] ed_waddr;

  graph_loader #(.N_NODES(NN), .N_EDGES(NE), .PF(PF), .W(W)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // beats in flight: expected word counters
  int nbeat = 0, ebeat = 0, ncommits = 0, ecommits = 0;

  always @(negedge clk) if (rst_n) begin
    nd_p_ready <= ($urandom_range(0, 3) != 0);
    ed_p_ready <= ($urandom_range(0, 3) != 0);
  end

  // monitor at the clock edge
  always @(posedge clk) if (rst_n) begin
    check(n_ready == nd_p_ready && e_ready == ed_p_ready, "ready follows buffers");
    if (n_valid && n_ready) begin
      check(nd_we && int'(nd_waddr) == nbeat % NB && nd_wdata == n_data, "node write");
      check(nd_commit == (nbeat % NB == NB - 1), "node commit on last beat");
      if (nd_commit) ncommits++;
      nbeat++;
    end else check(!nd_we && !nd_commit, "no node write without a beat");
    if (e_valid && e_ready) begin
      check(ed_we && int'(ed_waddr) == ebeat % EB && ed_attr == e_attr && ed_idx == e_idx, "edge write");
      check(ed_commit == (ebeat % EB == EB - 1), "edge commit on last beat");
      if (ed_commit) ecommits++;
      ebeat++;
    end else check(!ed_we && !ed_commit, "no edge write without a beat");
  end

  // node source
  initial begin
    n_valid = 0; n_data = '0;
    wait (rst_n);
    for (int b = 0; b < 3 * NB; b++) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      n_valid = 1'b1;
      foreach (n_data[l, k]) n_data[l][k] = W'($urandom);
      @(posedge clk);
      while (!n_ready) @(posedge clk);
      #1 n_valid = 1'b0;
    end
  end

  // edge source
  initial begin
    e_valid = 0; e_attr = '0; e_idx = '0;
    wait (rst_n);
    for (int b = 0; b < 3 * EB; b++) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      e_valid = 1'b1;
      foreach (e_attr[l, k]) e_attr[l][k] = W'($urandom);
      foreach (e_idx[l, k]) e_idx[l][k] = NIW'($urandom_range(0, NN - 1));
      @(posedge clk);
      while (!e_ready) @(posedge clk);
      #1 e_valid = 1'b0;
    end
  end

  initial begin
    nd_p_ready = 0; ed_p_ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (nbeat == 3 * NB && ebeat == 3 * EB);
    repeat (3) @(negedge clk);
    check(ncommits == 3 && ecommits == 3, "three graphs committed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
