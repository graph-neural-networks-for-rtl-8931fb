// edge_block: the IN edge block in its resource-optimized form. For every
// edge i it looks up the features of its receiver (edge_index[i][0]) and
// sender (edge_index[i][1]) node, concatenates <receiver, sender, edge
// features> and runs the MLP on it. Instantiated twice: as phi_R1 (node and
// edge features in, 4 updated edge features out) and as phi_R2 (updated node
// and edge features in, one sigmoid edge weight out).
//
// PF lanes work in parallel; lane l handles the edges i with i % PF == l, and
// each iteration of the edge loop covers PF edges, one iteration every RF
// cycles (loop unrolled by PF, pipelined with II = RF, as in the paper). The
// edge index and edge features are read in parallel from their cyclically
// partitioned buffers; the node features come from the node buffer's PF
// duplicates, two read ports per lane, so the random node look-ups never
// contend.
//
// Pipeline per iteration: cycle 0 addresses index and edge features, cycle 1
// addresses the two nodes, cycle 2 starts the MLP, which answers 3*RF cycles
// later. Results are written in edge order, one beat of PF rows per
// iteration. The block starts when all three input buffers hold a graph and
// its output buffer has a free bank; when the last beat is written it commits
// the output and releases the three inputs in the same cycle.
// Latency of one graph: (ceil(N_EDGES/PF) - 1) * RF + 2 + 3*RF + 1 cycles.
module edge_block #(
  parameter int N_NODES = 448,
  parameter int N_EDGES = 896,
  parameter int PF      = 16,
  parameter int RF      = 1,
  parameter int W       = 14,
  parameter int F       = 7,
  parameter int ND      = 3,
  parameter int ED      = 4,
  parameter int OD      = 4,
  parameter bit SIGMOID = 1'b0,
  parameter int H       = 8,
  parameter int NIN     = 2 * ND + ED,
  parameter int NPAR    = NIN * H + H + H * H + H + H * OD + OD,
  parameter int NIW     = $clog2(N_NODES),
  parameter int NRAW    = $clog2(N_NODES + 1),
  parameter int ERAW    = $clog2(N_EDGES + 1),
  parameter int EWAW    = $clog2((N_EDGES + PF - 1) / PF + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NPAR-1:0][W-1:0]        params,
  // node feature buffer (PF duplicates, 2 read ports each)
  input  logic                          nb_valid,
  output logic                          nb_release,
  output logic [2*PF-1:0][NRAW-1:0]     nb_raddr,
  input  logic [2*PF-1:0][ND*W-1:0]     nb_rdata,
  // edge feature buffer
  input  logic                          ef_valid,
  output logic                          ef_release,
  output logic [PF-1:0][ERAW-1:0]       ef_raddr,
  input  logic [PF-1:0][ED*W-1:0]       ef_rdata,
  // edge index buffer: row = {sender, receiver}
  input  logic                          ix_valid,
  output logic                          ix_release,
  output logic [PF-1:0][ERAW-1:0]       ix_raddr,
  input  logic [PF-1:0][2*NIW-1:0]      ix_rdata,
  // output buffer
  input  logic                          o_ready,
  output logic                          o_commit,
  output logic                          o_we,
  output logic [EWAW-1:0]               o_waddr,
  output logic [PF-1:0][OD*W-1:0]       o_wdata,
  output logic                          busy
);

  localparam int NW  = (N_EDGES + PF - 1) / PF;   // iterations of the edge loop
  localparam int RCW = $clog2(RF + 1);

  logic [EWAW-1:0] iss, ow;
  logic            issuing;
  logic [RCW-1:0]  rtmr;
  logic            s0, s1, s2;
  logic            start, done;
  logic [PF-1:0][ED*W-1:0] ef_q;
  logic [PF-1:0]           lane_ov;

  assign start = !busy && nb_valid && ef_valid && ix_valid && o_ready;
  assign s0    = issuing && (rtmr == '0);

  // iteration issue and result counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      issuing <= 1'b0;
      iss     <= '0;
      ow      <= '0;
      rtmr    <= '0;
      s1      <= 1'b0;
      s2      <= 1'b0;
    end else begin
      s1 <= s0;
      s2 <= s1;
      if (start) begin
        busy    <= 1'b1;
        issuing <= 1'b1;
        iss     <= '0;
        ow      <= '0;
        rtmr    <= '0;
      end else if (issuing) begin
        rtmr <= (int'(rtmr) == RF - 1) ? '0 : rtmr + RCW'(1);
        if (s0) begin
          if (int'(iss) == NW - 1) issuing <= 1'b0;
          iss <= iss + EWAW'(1);
        end
      end
      if (o_we) begin
        ow <= ow + EWAW'(1);
        if (done) busy <= 1'b0;
      end
    end
  end

  // cycle 0: edge index and edge features
  always_comb begin
    for (int l = 0; l < PF; l++) begin
      ix_raddr[l] = ERAW'(int'(iss) * PF + l);
      ef_raddr[l] = ERAW'(int'(iss) * PF + l);
    end
  end

  // cycle 1: receiver and sender look-up; hold the edge features one cycle
  always_comb begin
    for (int l = 0; l < PF; l++) begin
      nb_raddr[2*l]   = NRAW'(ix_rdata[l][0 +: NIW]);     // receiver
      nb_raddr[2*l+1] = NRAW'(ix_rdata[l][NIW +: NIW]);   // sender
    end
  end

  always_ff @(posedge clk) begin
    if (s1) ef_q <= ef_rdata;
  end

  // cycle 2: MLP per lane on <receiver, sender, edge>
  for (genvar l = 0; l < PF; l++) begin : g_lane
    logic [NIN-1:0][W-1:0] phi_in;
    logic [OD-1:0][W-1:0]  phi_out;
    assign phi_in = {ef_q[l], nb_rdata[2*l+1], nb_rdata[2*l]};
    mlp3 #(.N_IN(NIN), .N_OUT(OD), .H(H), .RF(RF), .W(W), .F(F), .SIGMOID(SIGMOID), .NPAR(NPAR)) u_mlp (
      .clk, .rst_n, .params(params), .in_valid(s2), .x(phi_in),
      .out_valid(lane_ov[l]), .y(phi_out));
    assign o_wdata[l] = phi_out;
  end

  assign o_we       = lane_ov[0];
  assign o_waddr    = ow;
  assign done       = o_we && (int'(ow) == NW - 1);
  assign o_commit   = done;
  assign nb_release = done;
  assign ef_release = done;
  assign ix_release = done;

endmodule
