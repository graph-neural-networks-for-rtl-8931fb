// tb_array_clone: writes graphs into a 3-way clone and drains the clones at
// different times. Checks that every clone holds the data, that the shared
// p_ready stays low until the slowest clone frees a bank, and that each
// clone's handshake is independent.
module tb_array_clone;
  localparam int NC = 3, ROWS = 8, RW = 10, WL = 4, RD = 4;
  localparam int WAW = $clog2((ROWS + WL - 1) / WL + 1), RAW = $clog2(ROWS + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = !clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic p_ready, p_commit, we;
  logic [WAW-1:0] waddr;
  logic [WL-1:0][RW-1:0] wdata;
  logic [NC-1:0] c_valid, c_release;
  logic [NC-1:0][RD-1:0][RAW-1:0] raddr;
  logic [NC-1:0][RD-1:0][RW-1:0] rdata;

  array_clone #(.N_CLONES(NC), .ROWS(ROWS), .ROW_W(RW), .WL(WL), .RD(RD)) dut (
    .clk, .rst_n, .p_ready, .p_commit, .we, .waddr, .wdata,
    .c_valid, .c_release, .raddr, .rdata);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic fill(input int g);
    for (int b = 0; b < ROWS / WL; b++) begin
      we = 1'b1; waddr = WAW'(b);
      for (int l = 0; l < WL; l++) wdata[l] = RW'(g * 64 + b * WL + l);
      p_commit = (b == ROWS / WL - 1);
      @(negedge clk);
    end
    we = 1'b0; p_commit = 1'b0;
  endtask

  task automatic drain(input int k, input int g);
    for (int b = 0; b < ROWS / RD; b++) begin
      for (int p = 0; p < RD; p++) raddr[k][p] = RAW'(b * RD + p);
      @(negedge clk);
      for (int p = 0; p < RD; p++)
        check(rdata[k][p] == RW'(g * 64 + b * RD + p), $sformatf("clone %0d graph %0d row %0d", k, g, b * RD + p));
    end
    c_release[k] = 1'b1;
    @(negedge clk);
    c_release[k] = 1'b0;
  endtask

  initial begin
    we = 0; p_commit = 0; c_release = '0; waddr = '0; wdata = '0; raddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    fill(1);
    fill(2);
    check(!p_ready && c_valid == 3'b111, "all clones full");
    drain(0, 1);
    drain(1, 1);
    check(!p_ready, "clone 2 still holds graph 1");
    drain(2, 1);
    check(p_ready, "bank free in every clone");
    fill(3);
    for (int k = 0; k < NC; k++) begin drain(k, 2); drain(k, 3); end
    check(c_valid == '0 && p_ready, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
