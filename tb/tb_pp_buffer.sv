// tb_pp_buffer: fills both banks of a small buffer (10 rows written 4 per
// beat, so the last beat is partial; 2 copies with 2 read ports each), checks
// the full/empty handshake, then reads every row through every port in both
// banks and checks the contents, the one-cycle read latency, and that rows
// past the end read as zero.
module tb_pp_buffer;
  localparam int ROWS = 10, RW = 12, WL = 4, CP = 2, RPC = 2, NRD = CP * RPC;
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

  logic p_ready, p_commit, we, c_valid, c_release;
  logic [WAW-1:0] waddr;
  logic [WL-1:0][RW-1:0] wdata;
  logic [NRD-1:0][RAW-1:0] raddr;
  logic [NRD-1:0][RW-1:0] rdata;

  pp_buffer #(.ROWS(ROWS), .ROW_W(RW), .WL(WL), .COPIES(CP), .RD_PER_COPY(RPC)) dut (
    .clk, .rst_n, .p_ready, .p_commit, .we, .waddr, .wdata,
    .c_valid, .c_release, .raddr, .rdata);

  function automatic logic [RW-1:0] val(input int g, input int r);
    return RW'(g * 256 + r * 7 + 3);
  endfunction

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic fill(input int g);
    for (int b = 0; b < (ROWS + WL - 1) / WL; b++) begin
      we = 1'b1; waddr = WAW'(b);
      for (int l = 0; l < WL; l++) wdata[l] = val(g, b * WL + l);
      p_commit = (b == (ROWS + WL - 1) / WL - 1);
      @(negedge clk);
    end
    we = 1'b0; p_commit = 1'b0;
  endtask

  task automatic drain(input int g);
    for (int r = 0; r <= ROWS; r++) begin
      for (int p = 0; p < NRD; p++) raddr[p] = RAW'((r + p) % (ROWS + 1));
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        int row = (r + p) % (ROWS + 1);
        check(rdata[p] == ((row < ROWS) ? val(g, row) : '0),
              $sformatf("graph %0d row %0d port %0d: %0h", g, row, p, rdata[p]));
      end
    end
    c_release = 1'b1;
    @(negedge clk);
    c_release = 1'b0;
  endtask

  initial begin
    we = 0; p_commit = 0; c_release = 0; waddr = '0; wdata = '0; raddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(p_ready && !c_valid, "empty after reset");
    fill(1);
    check(p_ready && c_valid, "one bank full");
    fill(2);
    check(!p_ready && c_valid, "both banks full");
    drain(1);
    check(p_ready && c_valid, "one bank left");
    fill(3);
    drain(2);
    drain(3);
    check(p_ready && !c_valid, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
