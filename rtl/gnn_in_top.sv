// gnn_in_top: interaction-network (IN) accelerator for classifying track
// segments, resource-optimized dataflow form.
//
// A graph is one detector sector: N_NODES hits (features r, phi, z) and
// N_EDGES candidate segments (features dr, dphi, dz, dR, plus the receiver and
// sender hit index). The network computes
//   a'_ij  = phi_R1(x_i, x_j, a_ij)          edge block 1
//   abar_i = sum over edges into i of a'_ij  aggregation
//   x'_i   = phi_O(x_i, abar_i)              node block
//   a''_ij = sigmoid(phi_R2(x'_i, x'_j, a'_ij))  edge block 2
// and returns a''_ij, the probability that segment ij belongs to a track.
//
// The four blocks form a task-level pipeline: each one reads its input arrays
// from ping-pong buffers and writes its output into the next ones, so up to
// five graphs (loading, EB1, aggregation, node block, EB2 + read-out) are in
// flight at once. Arrays read by more than one block are cloned (the edge
// index three times, the EB1 output twice); arrays read through the edge
// index (node features for both edge blocks) are kept in PF duplicates. PF is
// the number of parallel lanes in every block, RF the reuse factor (II of every
// inner loop, and of each MLP). Defaults are the paper's main
// resource-optimized configuration: 448 nodes, 896 edges, PF = 16, RF = 1,
// ap_fixed<14,7> (W = 14 bits, F = 7 fractional).
//
// Interfaces (all valid/ready, PF lanes per beat, element i in lane i % PF):
//   wt_*       load the 528 weights and biases (see weight_store);
//   n_*        node features, ceil(N_NODES/PF) beats per graph;
//   e_*        edge features and index pair {sender, receiver}, ceil(N_EDGES/PF)
//              beats per graph;
//   w_*        edge weights out, ceil(N_EDGES/PF) beats per graph, w_last on
//              the final beat, w_lanes marking the lanes that hold edges.
// Node and edge streams of one graph may arrive in any interleaving; graphs
// leave in the order they came in.
module gnn_in_top
  import gnn_pkg::*;
#(
  parameter int N_NODES = 448,
  parameter int N_EDGES = 896,
  parameter int PF      = 16,
  parameter int RF      = 1,
  parameter int W       = 14,
  parameter int F       = 7,
  parameter int NIW     = $clog2(N_NODES)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // weight loading
  input  logic                                wt_we,
  input  logic [$clog2(TOTAL_NPAR)-1:0]       wt_addr,
  input  logic [W-1:0]                        wt_data,
  // node stream
  input  logic                                n_valid,
  output logic                                n_ready,
  input  logic [PF-1:0][NODE_DIM-1:0][W-1:0]  n_data,
  // edge stream
  input  logic                                e_valid,
  output logic                                e_ready,
  input  logic [PF-1:0][EDGE_DIM-1:0][W-1:0]  e_attr,
  input  logic [PF-1:0][1:0][NIW-1:0]         e_idx,
  // edge weight stream
  output logic                                w_valid,
  input  logic                                w_ready,
  output logic [PF-1:0][W-1:0]                w_data,
  output logic [PF-1:0]                       w_lanes,
  output logic                                w_last
);

  localparam int NRAW = $clog2(N_NODES + 1);
  localparam int ERAW = $clog2(N_EDGES + 1);
  localparam int NWAW = $clog2((N_NODES + PF - 1) / PF + 1);
  localparam int EWAW = $clog2((N_EDGES + PF - 1) / PF + 1);
  localparam int XW   = NODE_DIM * W;
  localparam int AW   = EDGE_DIM * W;
  localparam int IXW  = 2 * NIW;

  // ---------------------------------------------------------------- weights
  logic [R1_NPAR-1:0][W-1:0] p_r1;
  logic [O_NPAR-1:0][W-1:0]  p_o;
  logic [R2_NPAR-1:0][W-1:0] p_r2;

  weight_store #(.W(W)) u_wts (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data, .p_r1, .p_o, .p_r2);

  // ---------------------------------------------------------------- loader
  logic                               nd_commit, nd_we, ed_commit, ed_we;
  logic [NWAW-1:0]                    nd_waddr;
  logic [EWAW-1:0]                    ed_waddr;
  logic [PF-1:0][NODE_DIM-1:0][W-1:0] nd_wdata;
  logic [PF-1:0][EDGE_DIM-1:0][W-1:0] ed_attr;
  logic [PF-1:0][1:0][NIW-1:0]        ed_idx;
  logic                               xe_rdy, xn_rdy, ef_rdy, ix_rdy;

  graph_loader #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .PF(PF), .W(W), .NIW(NIW),
                 .NWAW(NWAW), .EWAW(EWAW)) u_load (
    .clk, .rst_n,
    .n_valid, .n_ready, .n_data,
    .e_valid, .e_ready, .e_attr, .e_idx,
    .nd_p_ready(xe_rdy && xn_rdy), .nd_commit, .nd_we, .nd_waddr, .nd_wdata,
    .ed_p_ready(ef_rdy && ix_rdy), .ed_commit, .ed_we, .ed_waddr, .ed_attr, .ed_idx);

  // ---------------------------------------------------------------- input arrays
  // node features, PF duplicates with two read ports each, for edge block 1
  logic                        xe_valid, xe_release;
  logic [2*PF-1:0][NRAW-1:0]   xe_raddr;
  logic [2*PF-1:0][XW-1:0]     xe_rdata;

  pp_buffer #(.ROWS(N_NODES), .ROW_W(XW), .WL(PF), .COPIES(PF), .RD_PER_COPY(2),
              .WAW(NWAW), .RAW(NRAW)) u_x_eb1 (
    .clk, .rst_n, .p_ready(xe_rdy), .p_commit(nd_commit), .we(nd_we), .waddr(nd_waddr),
    .wdata(nd_wdata), .c_valid(xe_valid), .c_release(xe_release), .raddr(xe_raddr),
    .rdata(xe_rdata));

  // node features for the node block (static access)
  logic                        xn_valid, xn_release;
  logic [PF-1:0][NRAW-1:0]     xn_raddr;
  logic [PF-1:0][XW-1:0]       xn_rdata;

  pp_buffer #(.ROWS(N_NODES), .ROW_W(XW), .WL(PF), .COPIES(1), .RD_PER_COPY(PF),
              .WAW(NWAW), .RAW(NRAW)) u_x_nb (
    .clk, .rst_n, .p_ready(xn_rdy), .p_commit(nd_commit), .we(nd_we), .waddr(nd_waddr),
    .wdata(nd_wdata), .c_valid(xn_valid), .c_release(xn_release), .raddr(xn_raddr),
    .rdata(xn_rdata));

  // edge features for edge block 1
  logic                        ef_valid, ef_release;
  logic [PF-1:0][ERAW-1:0]     ef_raddr;
  logic [PF-1:0][AW-1:0]       ef_rdata;

  pp_buffer #(.ROWS(N_EDGES), .ROW_W(AW), .WL(PF), .COPIES(1), .RD_PER_COPY(PF),
              .WAW(EWAW), .RAW(ERAW)) u_ef (
    .clk, .rst_n, .p_ready(ef_rdy), .p_commit(ed_commit), .we(ed_we), .waddr(ed_waddr),
    .wdata(ed_attr), .c_valid(ef_valid), .c_release(ef_release), .raddr(ef_raddr),
    .rdata(ef_rdata));

  // edge index, cloned for edge block 1 (0), aggregation (1), edge block 2 (2)
  logic [2:0]                    ix_valid, ix_release;
  logic [2:0][PF-1:0][ERAW-1:0]  ix_raddr;
  logic [2:0][PF-1:0][IXW-1:0]   ix_rdata;

  array_clone #(.N_CLONES(3), .ROWS(N_EDGES), .ROW_W(IXW), .WL(PF), .RD(PF),
                .WAW(EWAW), .RAW(ERAW)) u_ix (
    .clk, .rst_n, .p_ready(ix_rdy), .p_commit(ed_commit), .we(ed_we), .waddr(ed_waddr),
    .wdata(ed_idx), .c_valid(ix_valid), .c_release(ix_release), .raddr(ix_raddr),
    .rdata(ix_rdata));

  // ---------------------------------------------------------------- edge block 1
  logic                    eu_rdy, eu_commit, eu_we, eb1_busy;
  logic [EWAW-1:0]         eu_waddr;
  logic [PF-1:0][AW-1:0]   eu_wdata;

  edge_block #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .PF(PF), .RF(RF), .W(W), .F(F),
               .ND(NODE_DIM), .ED(EDGE_DIM), .OD(R1_OUT), .SIGMOID(1'b0), .H(HIDDEN),
               .NPAR(R1_NPAR), .NIW(NIW), .NRAW(NRAW), .ERAW(ERAW), .EWAW(EWAW)) u_eb1 (
    .clk, .rst_n, .params(p_r1),
    .nb_valid(xe_valid), .nb_release(xe_release), .nb_raddr(xe_raddr), .nb_rdata(xe_rdata),
    .ef_valid(ef_valid), .ef_release(ef_release), .ef_raddr(ef_raddr), .ef_rdata(ef_rdata),
    .ix_valid(ix_valid[0]), .ix_release(ix_release[0]), .ix_raddr(ix_raddr[0]),
    .ix_rdata(ix_rdata[0]),
    .o_ready(eu_rdy), .o_commit(eu_commit), .o_we(eu_we), .o_waddr(eu_waddr),
    .o_wdata(eu_wdata), .busy(eb1_busy));

  // updated edge features, cloned for aggregation (0) and edge block 2 (1)
  logic [1:0]                    eu_valid, eu_release;
  logic [1:0][PF-1:0][ERAW-1:0]  eu_raddr;
  logic [1:0][PF-1:0][AW-1:0]    eu_rdata;

  array_clone #(.N_CLONES(2), .ROWS(N_EDGES), .ROW_W(AW), .WL(PF), .RD(PF),
                .WAW(EWAW), .RAW(ERAW)) u_eu (
    .clk, .rst_n, .p_ready(eu_rdy), .p_commit(eu_commit), .we(eu_we), .waddr(eu_waddr),
    .wdata(eu_wdata), .c_valid(eu_valid), .c_release(eu_release), .raddr(eu_raddr),
    .rdata(eu_rdata));

  // ---------------------------------------------------------------- aggregation
  logic                    ag_rdy, ag_commit, ag_we, agg_busy;
  logic [NWAW-1:0]         ag_waddr;
  logic [PF-1:0][AW-1:0]   ag_wdata;

  aggregate_block #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .PF(PF), .RF(RF), .W(W),
                    .ED(EDGE_DIM), .NIW(NIW), .ERAW(ERAW), .NWAW(NWAW)) u_agg (
    .clk, .rst_n,
    .eu_valid(eu_valid[0]), .eu_release(eu_release[0]), .eu_raddr(eu_raddr[0]),
    .eu_rdata(eu_rdata[0]),
    .ix_valid(ix_valid[1]), .ix_release(ix_release[1]), .ix_raddr(ix_raddr[1]),
    .ix_rdata(ix_rdata[1]),
    .o_ready(ag_rdy), .o_commit(ag_commit), .o_we(ag_we), .o_waddr(ag_waddr),
    .o_wdata(ag_wdata), .busy(agg_busy));

  logic                    ab_valid, ab_release;
  logic [PF-1:0][NRAW-1:0] ab_raddr;
  logic [PF-1:0][AW-1:0]   ab_rdata;

  pp_buffer #(.ROWS(N_NODES), .ROW_W(AW), .WL(PF), .COPIES(1), .RD_PER_COPY(PF),
              .WAW(NWAW), .RAW(NRAW)) u_agg_buf (
    .clk, .rst_n, .p_ready(ag_rdy), .p_commit(ag_commit), .we(ag_we), .waddr(ag_waddr),
    .wdata(ag_wdata), .c_valid(ab_valid), .c_release(ab_release), .raddr(ab_raddr),
    .rdata(ab_rdata));

  // ---------------------------------------------------------------- node block
  logic                    xu_rdy, xu_commit, xu_we, nb_busy;
  logic [NWAW-1:0]         xu_waddr;
  logic [PF-1:0][XW-1:0]   xu_wdata;

  node_block #(.N_NODES(N_NODES), .PF(PF), .RF(RF), .W(W), .F(F), .ND(NODE_DIM),
               .ED(EDGE_DIM), .H(HIDDEN), .NPAR(O_NPAR), .NRAW(NRAW), .NWAW(NWAW)) u_nb (
    .clk, .rst_n, .params(p_o),
    .xb_valid(xn_valid), .xb_release(xn_release), .xb_raddr(xn_raddr), .xb_rdata(xn_rdata),
    .ab_valid(ab_valid), .ab_release(ab_release), .ab_raddr(ab_raddr), .ab_rdata(ab_rdata),
    .o_ready(xu_rdy), .o_commit(xu_commit), .o_we(xu_we), .o_waddr(xu_waddr),
    .o_wdata(xu_wdata), .busy(nb_busy));

  // updated node features, PF duplicates with two read ports each, for edge block 2
  logic                        xu_valid, xu_release;
  logic [2*PF-1:0][NRAW-1:0]   xu_raddr;
  logic [2*PF-1:0][XW-1:0]     xu_rdata;

  pp_buffer #(.ROWS(N_NODES), .ROW_W(XW), .WL(PF), .COPIES(PF), .RD_PER_COPY(2),
              .WAW(NWAW), .RAW(NRAW)) u_xu (
    .clk, .rst_n, .p_ready(xu_rdy), .p_commit(xu_commit), .we(xu_we), .waddr(xu_waddr),
    .wdata(xu_wdata), .c_valid(xu_valid), .c_release(xu_release), .raddr(xu_raddr),
    .rdata(xu_rdata));

  // ---------------------------------------------------------------- edge block 2
  logic                    ew_rdy, ew_commit, ew_we, eb2_busy;
  logic [EWAW-1:0]         ew_waddr;
  logic [PF-1:0][W-1:0]    ew_wdata;

  edge_block #(.N_NODES(N_NODES), .N_EDGES(N_EDGES), .PF(PF), .RF(RF), .W(W), .F(F),
               .ND(NODE_DIM), .ED(EDGE_DIM), .OD(R2_OUT), .SIGMOID(1'b1), .H(HIDDEN),
               .NPAR(R2_NPAR), .NIW(NIW), .NRAW(NRAW), .ERAW(ERAW), .EWAW(EWAW)) u_eb2 (
    .clk, .rst_n, .params(p_r2),
    .nb_valid(xu_valid), .nb_release(xu_release), .nb_raddr(xu_raddr), .nb_rdata(xu_rdata),
    .ef_valid(eu_valid[1]), .ef_release(eu_release[1]), .ef_raddr(eu_raddr[1]),
    .ef_rdata(eu_rdata[1]),
    .ix_valid(ix_valid[2]), .ix_release(ix_release[2]), .ix_raddr(ix_raddr[2]),
    .ix_rdata(ix_rdata[2]),
    .o_ready(ew_rdy), .o_commit(ew_commit), .o_we(ew_we), .o_waddr(ew_waddr),
    .o_wdata(ew_wdata), .busy(eb2_busy));

  // edge weights
  logic                    ow_valid, ow_release;
  logic [PF-1:0][ERAW-1:0] ow_raddr;
  logic [PF-1:0][W-1:0]    ow_rdata;

  pp_buffer #(.ROWS(N_EDGES), .ROW_W(W), .WL(PF), .COPIES(1), .RD_PER_COPY(PF),
              .WAW(EWAW), .RAW(ERAW)) u_w_buf (
    .clk, .rst_n, .p_ready(ew_rdy), .p_commit(ew_commit), .we(ew_we), .waddr(ew_waddr),
    .wdata(ew_wdata), .c_valid(ow_valid), .c_release(ow_release), .raddr(ow_raddr),
    .rdata(ow_rdata));

  graph_unloader #(.N_EDGES(N_EDGES), .PF(PF), .W(W), .OD(1), .ERAW(ERAW), .EWAW(EWAW)) u_unl (
    .clk, .rst_n, .c_valid(ow_valid), .c_release(ow_release), .raddr(ow_raddr),
    .rdata(ow_rdata), .w_valid, .w_ready, .w_data, .w_lanes, .w_last);

endmodule
