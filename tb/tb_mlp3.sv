// tb_mlp3: runs the phi_R2 shape (10 -> 8 -> 8 -> 1, sigmoid) and the phi_O
// shape (7 -> 8 -> 8 -> 3) on random weights and inputs, with RF = 2, feeding a
// new vector every RF cycles, and compares every result with the reference
// model. Also checks the 3*RF latency.
module tb_mlp3;
  import gnn_ref_pkg::*;
  localparam int W = 14, F = 7, RF = 2;
  localparam int NP2 = 169, NPO = 163;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NP2-1:0][W-1:0] p2;
  logic [NPO-1:0][W-1:0] po;
  logic iv, ov2, ovo;
  logic [9:0][W-1:0] x2;
  logic [6:0][W-1:0] xo;
  logic [0:0][W-1:0] y2;
  logic [2:0][W-1:0] yo;

  mlp3 #(.N_IN(10), .N_OUT(1), .RF(RF), .W(W), .F(F), .SIGMOID(1'b1)) dut_r2 (
    .clk, .rst_n, .params(p2), .in_valid(iv), .x(x2), .out_valid(ov2), .y(y2));
  mlp3 #(.N_IN(7), .N_OUT(3), .RF(RF), .W(W), .F(F), .SIGMOID(1'b0)) dut_o (
    .clk, .rst_n, .params(po), .in_valid(iv), .x(xo), .out_valid(ovo), .y(yo));

  localparam int NV = 50;
  longint pv2[], pvo[];
  longint e2[NV][], eo[NV][];
  int nout, cyc, t_in[NV];

  always @(posedge clk) cyc <= cyc + 1;

  // collector
  initial begin
    nout = 0;
    forever begin
      @(negedge clk);
      if (ov2) begin
        checks += 2;
        if (longint'(signed'(y2[0])) != e2[nout][0]) begin
          failures++; $display("r2 vec %0d got %0d exp %0d", nout, signed'(y2[0]), e2[nout][0]);
        end
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (longint'(signed'(yo[k])) != eo[nout][k]) begin
            failures++; $display("o vec %0d out %0d got %0d exp %0d", nout, k, signed'(yo[k]), eo[nout][k]);
          end
        end
        if (!ovo) failures++;
        if (cyc - t_in[nout] != 3 * RF) begin
          failures++; $display("latency %0d", cyc - t_in[nout]);
        end
        nout++;
      end
    end
  end

  initial begin
    longint xv2[], xvo[];
    cyc = 0;
    iv = 1'b0;
    pv2 = new[NP2]; pvo = new[NPO];
    foreach (pv2[k]) begin pv2[k] = rnd(8); p2[k] = W'(pv2[k]); end
    foreach (pvo[k]) begin pvo[k] = rnd(8); po[k] = W'(pvo[k]); end
    xv2 = new[10]; xvo = new[7];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NV; n++) begin
      foreach (xv2[k]) begin xv2[k] = rnd(10); x2[k] = W'(xv2[k]); end
      foreach (xvo[k]) begin xvo[k] = rnd(10); xo[k] = W'(xvo[k]); end
      mlp(10, 1, 8, 1'b1, W, F, pv2, 0, xv2, e2[n]);
      mlp(7, 3, 8, 1'b0, W, F, pvo, 0, xvo, eo[n]);
      @(negedge clk);
      iv = 1'b1;
      t_in[n] = cyc;
      @(negedge clk);
      iv = 1'b0;
      repeat (RF - 1) @(negedge clk);
    end
    repeat (10 * RF) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("only %0d results", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
