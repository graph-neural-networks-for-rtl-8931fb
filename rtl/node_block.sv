// node_block: the IN node block. For every node i it concatenates the node
// features x_i with the aggregated messages abar'_i and computes the updated
// node features x'_i = phi_O(x_i, abar'_i).
//
// Both inputs are read in node order (static access) from cyclically
// partitioned buffers, PF nodes per iteration, one iteration every RF cycles;
// PF copies of phi_O work in parallel. Cycle 0 addresses both buffers, cycle 1
// starts the MLPs, which answer 3*RF cycles later; each answer is written as
// one beat of PF rows into the output buffer (the node copies read by the
// second edge block). The block starts when both inputs hold a graph and the
// output has a free bank, and its last beat commits the output and releases
// the inputs. Latency: (ceil(N_NODES/PF) - 1) * RF + 1 + 3*RF + 1 cycles.
module node_block #(
  parameter int N_NODES = 448,
  parameter int PF      = 16,
  parameter int RF      = 1,
  parameter int W       = 14,
  parameter int F       = 7,
  parameter int ND      = 3,
  parameter int ED      = 4,
  parameter int H       = 8,
  parameter int NIN     = ND + ED,
  parameter int NPAR    = NIN * H + H + H * H + H + H * ND + ND,
  parameter int NRAW    = $clog2(N_NODES + 1),
  parameter int NWAW    = $clog2((N_NODES + PF - 1) / PF + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NPAR-1:0][W-1:0]        params,
  // node features x_i
  input  logic                          xb_valid,
  output logic                          xb_release,
  output logic [PF-1:0][NRAW-1:0]       xb_raddr,
  input  logic [PF-1:0][ND*W-1:0]       xb_rdata,
  // aggregated messages abar'_i
  input  logic                          ab_valid,
  output logic                          ab_release,
  output logic [PF-1:0][NRAW-1:0]       ab_raddr,
  input  logic [PF-1:0][ED*W-1:0]       ab_rdata,
  // updated node features x'_i
  input  logic                          o_ready,
  output logic                          o_commit,
  output logic                          o_we,
  output logic [NWAW-1:0]               o_waddr,
  output logic [PF-1:0][ND*W-1:0]       o_wdata,
  output logic                          busy
);

  localparam int NW  = (N_NODES + PF - 1) / PF;
  localparam int RCW = $clog2(RF + 1);

  logic [NWAW-1:0] iss, ow;
  logic            issuing, s0, s1, start, done;
  logic [RCW-1:0]  rtmr;
  logic [PF-1:0]   lane_ov;

  assign start = !busy && xb_valid && ab_valid && o_ready;
  assign s0    = issuing && (rtmr == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      issuing <= 1'b0;
      iss     <= '0;
      ow      <= '0;
      rtmr    <= '0;
      s1      <= 1'b0;
    end else begin
      s1 <= s0;
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
          iss <= iss + NWAW'(1);
        end
      end
      if (o_we) begin
        ow <= ow + NWAW'(1);
        if (done) busy <= 1'b0;
      end
    end
  end

  always_comb begin
    for (int l = 0; l < PF; l++) begin
      xb_raddr[l] = NRAW'(int'(iss) * PF + l);
      ab_raddr[l] = NRAW'(int'(iss) * PF + l);
    end
  end

  for (genvar l = 0; l < PF; l++) begin : g_lane
    logic [NIN-1:0][W-1:0] phi_in;
    logic [ND-1:0][W-1:0]  phi_out;
    assign phi_in = {ab_rdata[l], xb_rdata[l]};
    mlp3 #(.N_IN(NIN), .N_OUT(ND), .H(H), .RF(RF), .W(W), .F(F), .SIGMOID(1'b0), .NPAR(NPAR)) u_mlp (
      .clk, .rst_n, .params(params), .in_valid(s1), .x(phi_in),
      .out_valid(lane_ov[l]), .y(phi_out));
    assign o_wdata[l] = phi_out;
  end

  assign o_we       = lane_ov[0];
  assign o_waddr    = ow;
  assign done       = o_we && (int'(ow) == NW - 1);
  assign o_commit   = done;
  assign xb_release = done;
  assign ab_release = done;

endmodule
