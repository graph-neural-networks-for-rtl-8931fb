// tb_node_block: node block (phi_O, 7 -> 8 -> 8 -> 3) on two random graphs of
// 9 nodes, 4 lanes, RF = 3. Checks every updated node against the reference
// MLP on <x_i, abar_i>, the start-to-commit latency
// (ceil(N/PF) - 1) * RF + 2 + 3*RF, and the release of both inputs.
module tb_node_block;
  import gnn_ref_pkg::*;
  localparam int NN = 9, PF = 4, RF = 3, W = 14, F = 7, NPAR = 163;
  localparam int NRAW = $clog2(NN + 1), NWN = (NN + PF - 1) / PF, NWAW = $clog2(NWN + 1);
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
  logic in_we, in_commit, xp_ready, ap_ready, x_valid, x_release, a_valid, a_release;
  logic [NWAW-1:0] in_waddr;
  logic [PF-1:0][3*W-1:0] x_wdata, x_rdata;
  logic [PF-1:0][4*W-1:0] a_wdata, a_rdata;
  logic [PF-1:0][NRAW-1:0] x_raddr, a_raddr, o_raddr;
  logic o_ready, o_commit, o_we, o_valid, o_release, busy;
  logic [NWAW-1:0] o_waddr;
  logic [PF-1:0][3*W-1:0] o_wdata, o_rdata;

  pp_buffer #(.ROWS(NN), .ROW_W(3*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_x (
    .clk, .rst_n, .p_ready(xp_ready), .p_commit(in_commit), .we(in_we), .waddr(in_waddr),
    .wdata(x_wdata), .c_valid(x_valid), .c_release(x_release), .raddr(x_raddr), .rdata(x_rdata));
  pp_buffer #(.ROWS(NN), .ROW_W(4*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_a (
    .clk, .rst_n, .p_ready(ap_ready), .p_commit(in_commit), .we(in_we), .waddr(in_waddr),
    .wdata(a_wdata), .c_valid(a_valid), .c_release(a_release), .raddr(a_raddr), .rdata(a_rdata));
  pp_buffer #(.ROWS(NN), .ROW_W(3*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_o (
    .clk, .rst_n, .p_ready(o_ready), .p_commit(o_commit), .we(o_we), .waddr(o_waddr),
    .wdata(o_wdata), .c_valid(o_valid), .c_release(o_release), .raddr(o_raddr), .rdata(o_rdata));

  node_block #(.N_NODES(NN), .PF(PF), .RF(RF), .W(W), .F(F), .ND(3), .ED(4)) dut (
    .clk, .rst_n, .params,
    .xb_valid(x_valid), .xb_release(x_release), .xb_raddr(x_raddr), .xb_rdata(x_rdata),
    .ab_valid(a_valid), .ab_release(a_release), .ab_raddr(a_raddr), .ab_rdata(a_rdata),
    .o_ready, .o_commit, .o_we, .o_waddr, .o_wdata, .busy);

  longint pv[];
  longint xv[2][], av[2][];
  int t_start, n_commit = 0;

  always @(posedge clk) if (rst_n) begin
    if (!busy && x_valid && a_valid && o_ready) t_start = cyc;
    if (o_commit) begin
      n_commit++;
      check(cyc - t_start == (NWN - 1) * RF + 2 + 3 * RF, $sformatf("latency %0d", cyc - t_start));
      check(x_release && a_release, "inputs released with the commit");
    end
  end

  initial begin
    in_we = 0; in_commit = 0; in_waddr = '0; x_wdata = '0; a_wdata = '0; o_release = 0; o_raddr = '0;
    pv = new[NPAR];
    foreach (pv[k]) begin pv[k] = rnd(8); params[k] = W'(pv[k]); end
    for (int g = 0; g < 2; g++) begin
      xv[g] = new[NN * 3]; av[g] = new[NN * 4];
      foreach (xv[g][k]) xv[g][k] = rnd(11);
      foreach (av[g][k]) av[g][k] = rnd(11);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 2; g++) begin
      for (int b = 0; b < NWN; b++) begin
        in_we = 1; in_waddr = NWAW'(b); in_commit = (b == NWN - 1);
        for (int l = 0; l < PF; l++) begin
          automatic int n = b * PF + l;
          for (int k = 0; k < 3; k++) x_wdata[l][k*W +: W] = (n < NN) ? W'(xv[g][n * 3 + k]) : '0;
          for (int k = 0; k < 4; k++) a_wdata[l][k*W +: W] = (n < NN) ? W'(av[g][n * 4 + k]) : '0;
        end
        @(negedge clk);
      end
      in_we = 0; in_commit = 0;
    end
    for (int g = 0; g < 2; g++) begin
      wait (rst_n && o_valid);
      @(negedge clk);
      for (int b = 0; b < NWN; b++) begin
        for (int l = 0; l < PF; l++) o_raddr[l] = NRAW'(b * PF + l);
        @(negedge clk);
        for (int l = 0; l < PF; l++) begin
          automatic int n = b * PF + l;
          if (n < NN) begin
            automatic longint in[], out[];
            in = new[7];
            for (int k = 0; k < 3; k++) in[k] = xv[g][n * 3 + k];
            for (int k = 0; k < 4; k++) in[3 + k] = av[g][n * 4 + k];
            mlp(7, 3, 8, 1'b0, W, F, pv, 0, in, out);
            for (int k = 0; k < 3; k++)
              check(longint'(signed'(o_rdata[l][k*W +: W])) == out[k],
                    $sformatf("graph %0d node %0d feature %0d: got %0d expected %0d", g, n, k,
                              signed'(o_rdata[l][k*W +: W]), out[k]));
          end
        end
      end
      o_release = 1; @(negedge clk); o_release = 0;
    end
    repeat (3) @(negedge clk);
    check(n_commit == 2 && !busy, "two graphs processed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
