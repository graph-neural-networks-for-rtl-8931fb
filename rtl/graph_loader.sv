// graph_loader: input interface of the accelerator. It takes one graph as two
// valid/ready streams and writes it into the graph buffers.
//
// Node stream: ceil(N_NODES/PF) beats of PF nodes (3 features each), node n in
// lane n % PF of beat n / PF. Edge stream: ceil(N_EDGES/PF) beats of PF edges,
// each with 4 features and the index pair (receiver, sender). This matches the
// cyclic partitioning by PF of the paper's input arrays. Lanes past the last
// node or edge of the final beat are ignored; a sector with fewer hits or
// segments is padded with null nodes and edges by the sender.
//
// Every accepted beat is written the same cycle (nd_we / ed_we) into all
// buffers of that array: the buffers that keep PF duplicates of the node
// features for the edge block thus receive the paper's "copy node attributes"
// step at load time. The last beat of a stream also commits its buffers. A
// stream is stalled (ready low) while any of its buffers has no free bank,
// i.e. while the blocks downstream are still busy with two earlier graphs.
module graph_loader
  import gnn_pkg::*;
#(
  parameter int N_NODES = 448,
  parameter int N_EDGES = 896,
  parameter int PF      = 16,
  parameter int W       = 14,
  parameter int NIW     = $clog2(N_NODES),
  parameter int NWAW    = $clog2((N_NODES + PF - 1) / PF + 1),
  parameter int EWAW    = $clog2((N_EDGES + PF - 1) / PF + 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // node stream
  input  logic                                n_valid,
  output logic                                n_ready,
  input  logic [PF-1:0][NODE_DIM-1:0][W-1:0]  n_data,
  // edge stream
  input  logic                                e_valid,
  output logic                                e_ready,
  input  logic [PF-1:0][EDGE_DIM-1:0][W-1:0]  e_attr,
  input  logic [PF-1:0][1:0][NIW-1:0]         e_idx,
  // node buffers
  input  logic                                nd_p_ready,
  output logic                                nd_commit,
  output logic                                nd_we,
  output logic [NWAW-1:0]                     nd_waddr,
  output logic [PF-1:0][NODE_DIM-1:0][W-1:0]  nd_wdata,
  // edge buffers (features and index)
  input  logic                                ed_p_ready,
  output logic                                ed_commit,
  output logic                                ed_we,
  output logic [EWAW-1:0]                     ed_waddr,
  output logic [PF-1:0][EDGE_DIM-1:0][W-1:0]  ed_attr,
  output logic [PF-1:0][1:0][NIW-1:0]         ed_idx
);

  localparam int NBEATS = (N_NODES + PF - 1) / PF;
  localparam int EBEATS = (N_EDGES + PF - 1) / PF;

  logic [NWAW-1:0] ncnt;
  logic [EWAW-1:0] ecnt;
  logic n_last, e_last;

  assign n_ready   = nd_p_ready;
  assign nd_we     = n_valid && n_ready;
  assign nd_waddr  = ncnt;
  assign nd_wdata  = n_data;
  assign n_last    = (int'(ncnt) == NBEATS - 1);
  assign nd_commit = nd_we && n_last;

  assign e_ready   = ed_p_ready;
  assign ed_we     = e_valid && e_ready;
  assign ed_waddr  = ecnt;
  assign ed_attr   = e_attr;
  assign ed_idx    = e_idx;
  assign e_last    = (int'(ecnt) == EBEATS - 1);
  assign ed_commit = ed_we && e_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ncnt <= '0;
      ecnt <= '0;
    end else begin
      if (nd_we) ncnt <= n_last ? '0 : ncnt + NWAW'(1);
      if (ed_we) ecnt <= e_last ? '0 : ecnt + EWAW'(1);
    end
  end

endmodule
