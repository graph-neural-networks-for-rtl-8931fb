// tb_gnn_in_top: end-to-end test of the interaction-network accelerator on a
// reduced graph size (10 nodes, 19 edges, 4 lanes, so every stream ends in a
// partial beat). It loads random weights, pushes NG random graphs back to
// back with random gaps on both input streams and random back-pressure on the
// output, and compares every edge weight with the integer reference model of
// the whole network. It also counts how often each mechanism of the design
// occurred and fails if one never did:
//   overlap   two or more blocks busy on different graphs in the same cycle
//   in_stall  an input beat held back because the buffers were full
//   out_stall an output beat held back by the consumer
//   partial   a final beat with unused lanes
//   clones    the three index clones holding different numbers of graphs
module tb_gnn_in_top;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;

  localparam int NN = 10, NE = 19, PF = 4, RF = 1, W = 14, F = 7, NG = 6;
  localparam int NIW = $clog2(NN);
  localparam int NB = (NN + PF - 1) / PF, EB = (NE + PF - 1) / PF;
  localparam int WATCHDOG = 20000 + NG * 40 * (NB + EB) * RF;

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = !clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wt_we;
  logic [$clog2(TOTAL_NPAR)-1:0] wt_addr;
  logic [W-1:0] wt_data;
  logic n_valid, n_ready, e_valid, e_ready, w_valid, w_ready, w_last;
  logic [PF-1:0][NODE_DIM-1:0][W-1:0] n_data;
  logic [PF-1:0][EDGE_DIM-1:0][W-1:0] e_attr;
  logic [PF-1:0][1:0][NIW-1:0] e_idx;
  logic [PF-1:0][W-1:0] w_data;
  logic [PF-1:0] w_lanes;

  gnn_in_top #(.N_NODES(NN), .N_EDGES(NE), .PF(PF), .RF(RF), .W(W), .F(F)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  longint pv[];
  longint xv[NG][], av[NG][], ew[NG][];
  int rv[NG][], sv[NG][];

  // mechanism counters
  int n_overlap = 0, n_in_stall = 0, n_out_stall = 0, n_partial = 0, n_clone_skew = 0;
  int t_first_in = -1, t_first_out = -1, t_last_out = 0;

  always @(posedge clk) if (rst_n) begin
    automatic int nb = int'(dut.u_eb1.busy) + int'(dut.u_agg.busy) + int'(dut.u_nb.busy)
                     + int'(dut.u_eb2.busy);
    if (nb >= 2) n_overlap++;
    if ((n_valid && !n_ready) || (e_valid && !e_ready)) n_in_stall++;
    if (w_valid && !w_ready) n_out_stall++;
    if (dut.ix_valid != 3'b000 && dut.ix_valid != 3'b111) n_clone_skew++;
    if ((n_valid && n_ready) && t_first_in < 0) t_first_in = cyc;
  end

  // output checker
  int obeat = 0;
  always @(posedge clk) if (rst_n && w_valid && w_ready) begin
    automatic int g = obeat / EB, b = obeat % EB;
    if (t_first_out < 0) t_first_out = cyc;
    t_last_out = cyc;
    if (w_lanes != '1) n_partial++;
    check(w_last == (b == EB - 1), "w_last");
    for (int l = 0; l < PF; l++) begin
      automatic int e = b * PF + l;
      check(w_lanes[l] == (e < NE), "w_lanes");
      if (e < NE && g < NG)
        check(longint'(signed'(w_data[l])) == ew[g][e],
              $sformatf("graph %0d edge %0d: got %0d expected %0d", g, e, signed'(w_data[l]), ew[g][e]));
    end
    obeat++;
  end

  always @(negedge clk) w_ready <= ($urandom_range(0, 3) != 0);

  // node source
  initial begin
    n_valid = 0; n_data = '0;
    wait (rst_n && wt_addr == '1);
    for (int g = 0; g < NG; g++)
      for (int b = 0; b < NB; b++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        n_valid = 1'b1;
        for (int l = 0; l < PF; l++)
          for (int k = 0; k < NODE_DIM; k++)
            n_data[l][k] = (b * PF + l < NN) ? W'(xv[g][(b * PF + l) * 3 + k]) : W'($urandom);
        @(posedge clk);
        while (!n_ready) @(posedge clk);
        #1 n_valid = 1'b0;
      end
  end

  // edge source
  initial begin
    e_valid = 0; e_attr = '0; e_idx = '0;
    wait (rst_n && wt_addr == '1);
    for (int g = 0; g < NG; g++)
      for (int b = 0; b < EB; b++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) @(negedge clk);
        e_valid = 1'b1;
        for (int l = 0; l < PF; l++) begin
          automatic int e = b * PF + l;
          for (int k = 0; k < EDGE_DIM; k++) e_attr[l][k] = (e < NE) ? W'(av[g][e * 4 + k]) : W'($urandom);
          e_idx[l][0] = (e < NE) ? NIW'(rv[g][e]) : NIW'($urandom);
          e_idx[l][1] = (e < NE) ? NIW'(sv[g][e]) : NIW'($urandom);
        end
        @(posedge clk);
        while (!e_ready) @(posedge clk);
        #1 e_valid = 1'b0;
      end
  end

  initial begin
    wt_we = 0; wt_addr = '0; wt_data = '0;
    pv = new[TOTAL_NPAR];
    foreach (pv[k]) pv[k] = rnd(7);
    for (int g = 0; g < NG; g++) begin
      xv[g] = new[NN * 3]; av[g] = new[NE * 4]; rv[g] = new[NE]; sv[g] = new[NE];
      foreach (xv[g][k]) xv[g][k] = rnd(9);
      foreach (av[g][k]) av[g][k] = rnd(8);
      foreach (rv[g][k]) begin rv[g][k] = $urandom_range(0, NN - 1); sv[g][k] = $urandom_range(0, NN - 1); end
      in_forward(NN, NE, W, F, pv, xv[g], av[g], rv[g], sv[g], ew[g]);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < TOTAL_NPAR; k++) begin
      @(negedge clk);
      wt_we = 1'b1; wt_addr = 10'(k); wt_data = W'(pv[k]);
    end
    @(negedge clk);
    wt_we = 1'b0;
    wt_addr = '1;
    wait (obeat == NG * EB);
    repeat (5) @(negedge clk);
    check(!w_valid, "no extra output");
    $display("graphs %0d, cycles from first input to last output %0d, first output after %0d",
             NG, t_last_out - t_first_in, t_first_out - t_first_in);
    $display("overlap=%0d in_stall=%0d out_stall=%0d partial=%0d clone_skew=%0d",
             n_overlap, n_in_stall, n_out_stall, n_partial, n_clone_skew);
    check(n_overlap > 0, "task-level overlap happened");
    check(n_in_stall > 0, "input stall happened");
    check(n_out_stall > 0, "output back-pressure happened");
    if (NN % PF != 0 || NE % PF != 0) check(n_partial > 0, "partial last beat happened");
    check(n_clone_skew > 0, "clones drained independently");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
