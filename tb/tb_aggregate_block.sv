// tb_aggregate_block: sums the features of 14 edges onto 9 nodes with 4
// lanes, for two graphs and RF = 1 and RF = 2 (two instances). Receivers are
// drawn from a few nodes only, so lanes hit the same node in consecutive
// iterations and several lanes hit the same node in one iteration; large
// feature values make the W-bit sums wrap. Checks every aggregated row against
// a plain sum, the start-to-commit latency
// (2*ceil(N/PF) + ceil(E/PF) - 3) * RF + 4, and the release of both inputs.
module tb_aggregate_block;
  import gnn_ref_pkg::*;
  localparam int NN = 9, NE = 14, PF = 4, W = 14;
  localparam int NIW = $clog2(NN), NRAW = $clog2(NN + 1), ERAW = $clog2(NE + 1);
  localparam int NWN = (NN + PF - 1) / PF, NWE = (NE + PF - 1) / PF;
  localparam int NWAW = $clog2(NWN + 1), EWAW = $clog2(NWE + 1);
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

  longint av[2][];
  int rv[2][];

  // shared stimulus
  logic a_we, a_commit;
  logic [EWAW-1:0] a_waddr;
  logic [PF-1:0][4*W-1:0] a_wdata;
  logic [PF-1:0][2*NIW-1:0] i_wdata;

  for (genvar R = 1; R <= 2; R++) begin : g_rf
    logic ap_ready, ip_ready, a_valid, a_release, i_valid, i_release;
    logic [PF-1:0][ERAW-1:0] a_raddr, i_raddr;
    logic [PF-1:0][4*W-1:0] a_rdata;
    logic [PF-1:0][2*NIW-1:0] i_rdata;
    logic o_ready, o_commit, o_we, o_valid, o_release, busy;
    logic [NWAW-1:0] o_waddr;
    logic [PF-1:0][4*W-1:0] o_wdata, o_rdata;
    logic [PF-1:0][NRAW-1:0] o_raddr;
    int t_start, n_commit = 0;

    pp_buffer #(.ROWS(NE), .ROW_W(4*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_a (
      .clk, .rst_n, .p_ready(ap_ready), .p_commit(a_commit), .we(a_we), .waddr(a_waddr),
      .wdata(a_wdata), .c_valid(a_valid), .c_release(a_release), .raddr(a_raddr), .rdata(a_rdata));
    pp_buffer #(.ROWS(NE), .ROW_W(2*NIW), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_i (
      .clk, .rst_n, .p_ready(ip_ready), .p_commit(a_commit), .we(a_we), .waddr(a_waddr),
      .wdata(i_wdata), .c_valid(i_valid), .c_release(i_release), .raddr(i_raddr), .rdata(i_rdata));
    pp_buffer #(.ROWS(NN), .ROW_W(4*W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF)) u_o (
      .clk, .rst_n, .p_ready(o_ready), .p_commit(o_commit), .we(o_we), .waddr(o_waddr),
      .wdata(o_wdata), .c_valid(o_valid), .c_release(o_release), .raddr(o_raddr), .rdata(o_rdata));

    aggregate_block #(.N_NODES(NN), .N_EDGES(NE), .PF(PF), .RF(R), .W(W), .ED(4)) dut (
      .clk, .rst_n,
      .eu_valid(a_valid), .eu_release(a_release), .eu_raddr(a_raddr), .eu_rdata(a_rdata),
      .ix_valid(i_valid), .ix_release(i_release), .ix_raddr(i_raddr), .ix_rdata(i_rdata),
      .o_ready, .o_commit, .o_we, .o_waddr, .o_wdata, .busy);

    always @(posedge clk) if (rst_n) begin
      if (!busy && a_valid && i_valid && o_ready) t_start = cyc;
      if (o_commit) begin
        n_commit++;
        check(cyc - t_start == (2 * NWN + NWE - 3) * R + 4, $sformatf("RF=%0d latency %0d", R, cyc - t_start));
        check(a_release && i_release, "inputs released with the commit");
      end
    end

    initial begin
      o_release = 0; o_raddr = '0;
      for (int g = 0; g < 2; g++) begin
        wait (rst_n && o_valid);
        @(negedge clk);
        for (int b = 0; b < NWN; b++) begin
          for (int l = 0; l < PF; l++) o_raddr[l] = NRAW'(b * PF + l);
          @(negedge clk);
          for (int l = 0; l < PF; l++) begin
            automatic int n = b * PF + l;
            if (n < NN) for (int k = 0; k < 4; k++) begin
              automatic longint s = 0;
              for (int e = 0; e < NE; e++) if (rv[g][e] == n) s += av[g][e * 4 + k];
              s = wrapw(s, W);
              check(longint'(signed'(o_rdata[l][k*W +: W])) == s,
                    $sformatf("RF=%0d graph %0d node %0d feature %0d: got %0d expected %0d", R, g, n, k,
                              signed'(o_rdata[l][k*W +: W]), s));
            end
          end
        end
        o_release = 1; @(negedge clk); o_release = 0;
      end
    end
  end

  initial begin
    a_we = 0; a_commit = 0; a_waddr = '0; a_wdata = '0; i_wdata = '0;
    for (int g = 0; g < 2; g++) begin
      av[g] = new[NE * 4]; rv[g] = new[NE];
      foreach (av[g][k]) av[g][k] = rnd(W);
      foreach (rv[g][k]) rv[g][k] = (g == 0) ? $urandom_range(0, 2) : $urandom_range(0, NN - 1);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int g = 0; g < 2; g++) begin
      for (int b = 0; b < NWE; b++) begin
        a_we = 1; a_waddr = EWAW'(b); a_commit = (b == NWE - 1);
        for (int l = 0; l < PF; l++) begin
          automatic int e = b * PF + l;
          for (int k = 0; k < 4; k++) a_wdata[l][k*W +: W] = (e < NE) ? W'(av[g][e * 4 + k]) : '0;
          i_wdata[l] = (e < NE) ? {NIW'($urandom_range(0, NN - 1)), NIW'(rv[g][e])} : '0;
        end
        @(negedge clk);
      end
      a_we = 0; a_commit = 0;
    end
    wait (g_rf[1].n_commit == 2 && g_rf[2].n_commit == 2);
    repeat (2 * NWN + 6) @(negedge clk);
    check(!g_rf[1].busy && !g_rf[2].busy, "both idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
