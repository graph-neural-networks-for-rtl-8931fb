// tb_edge_block: edge block in its phi_R1 shape (3-feature nodes, 4-feature
// edges, 4 outputs) on two random graphs of 9 nodes and 14 edges, 4 lanes,
// RF = 2. The input arrays sit in pp_buffers, the node array in 4 copies.
// Checks every output row against the reference MLP applied to
// <x_receiver, x_sender, a_ij>, that the inputs are released and the output
// committed once per graph, and the per-graph latency
// (ceil(E/PF) - 1) * RF + 3 + 3*RF cycles from start to commit.
module tb_edge_block;
  import gnn_ref_pkg::*;
  localparam int NN = 9, NE = 14, PF = 4, RF = 2, W = 14, F = 7;
  localparam int NIW = $clog2(NN), NRAW = $clog2(NN + 1), ERAW = $clog2(NE + 1);
  localparam int NWN = (NN + PF - 1) / PF, NWE = (NE + PF - 1) / PF;
  localparam int NWAW = $clog2(NWN + 1), EWAW = $clog2(NWE + 1);
  localparam int NPAR = 196;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = !clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [NPAR-1:0][W-1:0] params;
  // node buffer
  logic xp_ready, x_we, x_commit, x_valid, x_release;
  logic [NWAW-1:0] x_waddr;
  logic [PF-1:0][3*W-1:0] x_wdata;
  logic [2*PF-1:0][NRAW-1:0] x_raddr;
  logic [2*PF-1:0][3*W-1:0] x_rdata;
  // edge feature buffer
  logic ap_ready, a_we, a_commit, a_valid, a_release;
  logic [EWAW-1:0] a_waddr;
  logic [PF-1:0][4*W-1:0] a_wdata;
  logic [PF-1:0][ERAW-1:0] a_raddr;
  logic [PF-1:0][4*W-1:0] a_rdata;
  // index buffer
  logic ip_ready, i_valid, i_release;
  logic [PF-1:0][2*NIW-1:0] i_wdata;
  logic [PF-1:0][ERAW-1:0] i_raddr;
  logic [PF-1:0][2*NIW-1:0] i_rdata;
  // output buffer
  logic o_ready, o_commit, o_we, o_valid, o_release, busy;
  logic [EWAW-1:0] o_waddr;
  logic [PF-1:0][4*W-1:0] o_wdata, o_rdata;
  logic [PF-1:0][ERAW-1:0] o_raddr;

  pp_buffer #(.ROWS(NN), .ROW_W(3*W), .WL(PF), .COPIES(PF), .RD_PER_COPY(2)) u_x (
    .clk, .rst_n, .p_ready(xp_ready), .p_commit(x_commit), .we(x_we), .waddr(x_waddr),
    .wdata(x_wdata), .c_valid(x_valid), .c_release(x_release), .raddr(x_raddr), .rdata(x_rdata));
  pp_buffer #(.ROWS(NE), .ROW_W(4*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_a (
    .clk, .rst_n, .p_ready(ap_ready), .p_commit(a_commit), .we(a_we), .waddr(a_waddr),
    .wdata(a_wdata), .c_valid(a_valid), .c_release(a_release), .raddr(a_raddr), .rdata(a_rdata));
  pp_buffer #(.ROWS(NE), .ROW_W(2*NIW), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_i (
    .clk, .rst_n, .p_ready(ip_ready), .p_commit(a_commit), .we(a_we), .waddr(a_waddr),
    .wdata(i_wdata), .c_valid(i_valid), .c_release(i_release), .raddr(i_raddr), .rdata(i_rdata));
  pp_buffer #(.ROWS(NE), .ROW_W(4*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_o (
    .clk, .rst_n, .p_ready(o_ready), .p_commit(o_commit), .we(o_we), .waddr(o_waddr),
    .wdata(o_wdata), .c_valid(o_valid), .c_release(o_release), .raddr(o_raddr), .rdata(o_rdata));

  edge_block #(.N_NODES(NN), .N_EDGES(NE), .PF(PF), .RF(RF), .W(W), .F(F),
               .ND(3), .ED(4), .OD(4), .SIGMOID(1'b0)) dut (
    .clk, .rst_n, .params,
    .nb_valid(x_valid), .nb_release(x_release), .nb_raddr(x_raddr), .nb_rdata(x_rdata),
    .ef_valid(a_valid), .ef_release(a_release), .ef_raddr(a_raddr), .ef_rdata(a_rdata),
    .ix_valid(i_valid), .ix_release(i_release), .ix_raddr(i_raddr), .ix_rdata(i_rdata),
    .o_ready, .o_commit, .o_we, .o_waddr, .o_wdata, .busy);

  longint pv[];
  longint xv[2][], av[2][];
  int rv[2][], sv[2][];
  int t_start, n_commit = 0, n_rel = 0;

  always @(posedge clk) if (rst_n) begin
    if (!busy && x_valid && a_valid && i_valid && o_ready) t_start = cyc;
    if (o_commit) begin
      n_commit++;
      check(cyc - t_start == (NWE - 1) * RF + 3 + 3 * RF, $sformatf("latency %0d", cyc - t_start));
      check(x_release && a_release && i_release, "inputs released with the commit");
    end
    if (x_release) n_rel++;
  end

  initial begin
    x_we = 0; x_commit = 0; a_we = 0; a_commit = 0; o_release = 0; o_raddr = '0;
    x_waddr = '0; a_waddr = '0; x_wdata = '0; a_wdata = '0; i_wdata = '0;
    pv = new[NPAR];
    foreach (pv[k]) begin pv[k] = rnd(8); params[k] = W'(pv[k]); end
    for (int g = 0; g < 2; g++) begin
      xv[g] = new[NN * 3]; av[g] = new[NE * 4]; rv[g] = new[NE]; sv[g] = new[NE];
      foreach (xv[g][k]) xv[g][k] = rnd(11);
      foreach (av[g][k]) av[g][k] = rnd(11);
      foreach (rv[g][k]) begin rv[g][k] = $urandom_range(0, NN - 1); sv[g][k] = $urandom_range(0, NN - 1); end
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 2; g++) begin
      for (int b = 0; b < NWN; b++) begin
        x_we = 1; x_waddr = NWAW'(b); x_commit = (b == NWN - 1);
        for (int l = 0; l < PF; l++)
          for (int k = 0; k < 3; k++)
            x_wdata[l][k*W +: W] = (b * PF + l < NN) ? W'(xv[g][(b * PF + l) * 3 + k]) : '0;
        @(negedge clk);
      end
      x_we = 0; x_commit = 0;
      for (int b = 0; b < NWE; b++) begin
        a_we = 1; a_waddr = EWAW'(b); a_commit = (b == NWE - 1);
        for (int l = 0; l < PF; l++) begin
          automatic int e = b * PF + l;
          for (int k = 0; k < 4; k++) a_wdata[l][k*W +: W] = (e < NE) ? W'(av[g][e * 4 + k]) : '0;
          i_wdata[l] = (e < NE) ? {NIW'(sv[g][e]), NIW'(rv[g][e])} : '0;
        end
        @(negedge clk);
      end
      a_we = 0; a_commit = 0;
    end
    // read back both results
    for (int g = 0; g < 2; g++) begin
      wait (rst_n && o_valid);
      @(negedge clk);
      for (int b = 0; b < NWE; b++) begin
        for (int l = 0; l < PF; l++) o_raddr[l] = ERAW'(b * PF + l);
        @(negedge clk);
        for (int l = 0; l < PF; l++) begin
          automatic int e = b * PF + l;
          if (e < NE) begin
            automatic longint in[], out[];
            in = new[10];
            for (int k = 0; k < 3; k++) in[k] = xv[g][rv[g][e] * 3 + k];
            for (int k = 0; k < 3; k++) in[3 + k] = xv[g][sv[g][e] * 3 + k];
            for (int k = 0; k < 4; k++) in[6 + k] = av[g][e * 4 + k];
            mlp(10, 4, 8, 1'b0, W, F, pv, 0, in, out);
            for (int k = 0; k < 4; k++)
              check(longint'(signed'(o_rdata[l][k*W +: W])) == out[k],
                    $sformatf("graph %0d edge %0d feature %0d: got %0d expected %0d", g, e, k,
                              signed'(o_rdata[l][k*W +: W]), out[k]));
          end
        end
      end
      o_release = 1; @(negedge clk); o_release = 0;
    end
    repeat (3) @(negedge clk);
    check(n_commit == 2 && n_rel == 2 && !busy, "two graphs processed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
