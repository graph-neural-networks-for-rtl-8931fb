// pp_buffer: one graph array (node features, edge features, edge index, ...)
// held as a ping-pong pair of banks so that a producing block can fill graph
// g+1 while the consuming block still reads graph g. This is the channel the
// paper's task-level (dataflow) pipelining relies on.
//
// Writes are cyclically partitioned: one write beat carries WL rows, rows
// waddr*WL .. waddr*WL+WL-1 (rows at or past ROWS are dropped, so a graph whose
// size is not a multiple of WL still fits). Reads are row-granular random
// access, with one cycle latency (rdata is registered). For arrays that the
// consumer indexes through the edge index (non-static access) the paper keeps
// one duplicate per parallel lane; COPIES does that here: every write goes to
// all COPIES duplicates and read port r is served by duplicate r/RD_PER_COPY.
//
// Bank handshake. Producer: p_ready says the write bank is free; the producer
// writes its rows and pulses p_commit (the write in the same cycle still
// lands), which hands the bank to the consumer. Consumer: c_valid says a
// committed bank is there; it reads it and pulses c_release to free it.
// A read port addressing a row at or past ROWS returns zero.
module pp_buffer #(
  parameter int ROWS        = 448,
  parameter int ROW_W       = 42,
  parameter int WL          = 16,
  parameter int COPIES      = 1,
  parameter int RD_PER_COPY = 16,
  parameter int NRD         = COPIES * RD_PER_COPY,
  parameter int WAW         = $clog2((ROWS + WL - 1) / WL + 1),
  parameter int RAW         = $clog2(ROWS + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // producer side
  output logic                           p_ready,
  input  logic                           p_commit,
  input  logic                           we,
  input  logic [WAW-1:0]                 waddr,
  input  logic [WL-1:0][ROW_W-1:0]       wdata,
  // consumer side
  output logic                           c_valid,
  input  logic                           c_release,
  input  logic [NRD-1:0][RAW-1:0]        raddr,
  output logic [NRD-1:0][ROW_W-1:0]      rdata
);

  logic [ROW_W-1:0] mem [COPIES][2][ROWS];
  logic [1:0]       full;
  logic             wptr, rptr;

  assign p_ready = !full[wptr];
  assign c_valid = full[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wptr <= 1'b0;
      rptr <= 1'b0;
    end else begin
      if (p_commit) begin
        full[wptr] <= 1'b1;
        wptr       <= !wptr;
      end
      if (c_release) begin
        full[rptr] <= 1'b0;
        rptr       <= !rptr;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int c = 0; c < COPIES; c++) begin
        for (int l = 0; l < WL; l++) begin
          if (int'(waddr) * WL + l < ROWS) mem[c][wptr][int'(waddr) * WL + l] <= wdata[l];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < NRD; r++) begin
      if (int'(raddr[r]) < ROWS) rdata[r] <= mem[r / RD_PER_COPY][rptr][raddr[r]];
      else                       rdata[r] <= '0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) p_commit |-> p_ready)
    else $error("pp_buffer: commit into a full bank");
  assert property (@(posedge clk) disable iff (!rst_n) we |-> p_ready)
    else $error("pp_buffer: write into a full bank");
  assert property (@(posedge clk) disable iff (!rst_n) c_release |-> c_valid)
    else $error("pp_buffer: release of an empty bank");

endmodule
