// array_clone: the cloning layer. An array that several blocks read (the edge
// index, the first edge block's output) is written once and stored in
// N_CLONES independent ping-pong buffers, one per consumer, so that no buffer
// is ever read by two blocks and each consumer frees its copy on its own
// schedule.
//
// The producer side looks like one pp_buffer: p_ready is high only when every
// clone has a free bank, and we/waddr/wdata/p_commit go to all clones. The
// consumer sides are separate per clone (index k of c_valid, c_release, raddr,
// rdata). Timing is that of pp_buffer: one-cycle read latency.
module array_clone #(
  parameter int N_CLONES    = 2,
  parameter int ROWS        = 896,
  parameter int ROW_W       = 18,
  parameter int WL          = 16,
  parameter int RD          = 16,
  parameter int WAW         = $clog2((ROWS + WL - 1) / WL + 1),
  parameter int RAW         = $clog2(ROWS + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  output logic                                  p_ready,
  input  logic                                  p_commit,
  input  logic                                  we,
  input  logic [WAW-1:0]                        waddr,
  input  logic [WL-1:0][ROW_W-1:0]              wdata,
  output logic [N_CLONES-1:0]                   c_valid,
  input  logic [N_CLONES-1:0]                   c_release,
  input  logic [N_CLONES-1:0][RD-1:0][RAW-1:0]  raddr,
  output logic [N_CLONES-1:0][RD-1:0][ROW_W-1:0] rdata
);

  logic [N_CLONES-1:0] rdy;

  assign p_ready = &rdy;

  for (genvar k = 0; k < N_CLONES; k++) begin : g_clone
    pp_buffer #(.ROWS(ROWS), .ROW_W(ROW_W), .WL(WL), .COPIES(1), .RD_PER_COPY(RD),
                .WAW(WAW), .RAW(RAW)) u_buf (
      .clk, .rst_n,
      .p_ready(rdy[k]), .p_commit(p_commit), .we(we), .waddr(waddr), .wdata(wdata),
      .c_valid(c_valid[k]), .c_release(c_release[k]), .raddr(raddr[k]), .rdata(rdata[k]));
  end

endmodule
