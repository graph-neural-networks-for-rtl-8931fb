// tb_dense_layer: checks dense_layer against the integer reference for two
// reuse factors (1 and 3), with back-to-back vectors at II = RF, and checks
// that each result arrives exactly RF cycles after its input.
module tb_dense_layer;
  import gnn_ref_pkg::*;

  localparam int NI = 10, NO = 8, W = 14, F = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one instance per reuse factor
  logic                        iv1, iv3, ov1, ov3;
  logic [NI-1:0][W-1:0]        x;
  logic [NO-1:0][NI-1:0][W-1:0] wt;
  logic [NO-1:0][W-1:0]        b;
  logic [NO-1:0][W-1:0]        y1, y3;
  logic [NO-1:0][W-1:0]        y1r, y3r;

  dense_layer #(.N_IN(NI), .N_OUT(NO), .RF(1), .W(W), .F(F), .RELU(1'b1)) dut1 (
    .clk, .rst_n, .in_valid(iv1), .x, .wt, .bias(b), .out_valid(ov1), .y(y1));
  dense_layer #(.N_IN(NI), .N_OUT(NO), .RF(3), .W(W), .F(F), .RELU(1'b0)) dut3 (
    .clk, .rst_n, .in_valid(iv3), .x, .wt, .bias(b), .out_valid(ov3), .y(y3));

  task automatic run(input int rf, input int nvec);
    longint xv[], wv[], bv[], yr[];
    int t0, lat;
    xv = new[NI]; wv = new[NI * NO]; bv = new[NO];
    for (int n = 0; n < nvec; n++) begin
      for (int i = 0; i < NI; i++) begin xv[i] = rnd(W - 2); x[i] = W'(xv[i]); end
      if (n == 0) begin
        for (int k = 0; k < NI * NO; k++) begin wv[k] = rnd(9); wt[k / NI][k % NI] = W'(wv[k]); end
        for (int o = 0; o < NO; o++) begin bv[o] = rnd(10); b[o] = W'(bv[o]); end
      end
      dense(NI, NO, rf == 1, W, F, xv, wv, bv, yr);
      @(negedge clk);
      if (rf == 1) iv1 = 1'b1; else iv3 = 1'b1;
      @(negedge clk);
      iv1 = 1'b0; iv3 = 1'b0;
      lat = 1;
      while (!(rf == 1 ? ov1 : ov3)) begin @(negedge clk); lat++; end
      checks++;
      if (lat != rf) begin
        failures++; $display("latency %0d, expected %0d", lat, rf);
      end
      for (int o = 0; o < NO; o++) begin
        longint got;
        got = longint'(signed'(rf == 1 ? y1[o] : y3[o]));
        checks++;
        if (got != yr[o]) begin
          failures++;
          $display("rf=%0d vec %0d out %0d: got %0d expected %0d", rf, n, o, got, yr[o]);
        end
      end
      // next vector issued right at the end of this one (II = RF)
      if (rf > 1) for (int k = 0; k < 0; k++) @(negedge clk);
    end
  endtask

  initial begin
    iv1 = 1'b0; iv3 = 1'b0; x = '0; wt = '0; b = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1, 40);
    run(3, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
