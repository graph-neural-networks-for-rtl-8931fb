// aggregate_block: the IN edge-aggregation block, resource-optimized form
// (sum aggregation). For every node i it forms abar'_i, the sum of the
// updated features a'_ij of all edges whose receiver is i.
//
// Several lanes adding into the same node in one cycle would collide, so each
// of the PF lanes accumulates into a private copy of the node array
// (node_interim[PF][N_NODES][ED]); lane l takes the edges with i % PF == l. The
// block runs the paper's three loops in turn, each unrolled by PF and issuing
// one iteration every RF cycles:
//   RESET  ceil(N_NODES/PF) iterations, zero PF nodes in all PF copies;
//   ADD    ceil(N_EDGES/PF) iterations, read PF edges (index and features) and
//          add each into its lane's copy at the receiver (one cycle later);
//   SUM    ceil(N_NODES/PF) iterations, add the PF copies of PF nodes and
//          write them as one beat to the output buffer.
// Sums wrap at W bits, as the ap_fixed array type of the HLS design would.
// It starts when both inputs hold a graph and the output has a free bank; the
// last SUM beat commits the output and releases both inputs.
module aggregate_block #(
  parameter int N_NODES = 448,
  parameter int N_EDGES = 896,
  parameter int PF      = 16,
  parameter int RF      = 1,
  parameter int W       = 14,
  parameter int ED      = 4,
  parameter int NIW     = $clog2(N_NODES),
  parameter int ERAW    = $clog2(N_EDGES + 1),
  parameter int NWAW    = $clog2((N_NODES + PF - 1) / PF + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // updated edge features
  input  logic                          eu_valid,
  output logic                          eu_release,
  output logic [PF-1:0][ERAW-1:0]       eu_raddr,
  input  logic [PF-1:0][ED*W-1:0]       eu_rdata,
  // edge index: row = {sender, receiver}
  input  logic                          ix_valid,
  output logic                          ix_release,
  output logic [PF-1:0][ERAW-1:0]       ix_raddr,
  input  logic [PF-1:0][2*NIW-1:0]      ix_rdata,
  // aggregated node features
  input  logic                          o_ready,
  output logic                          o_commit,
  output logic                          o_we,
  output logic [NWAW-1:0]               o_waddr,
  output logic [PF-1:0][ED*W-1:0]       o_wdata,
  output logic                          busy
);

  localparam int NWN = (N_NODES + PF - 1) / PF;
  localparam int NWE = (N_EDGES + PF - 1) / PF;
  localparam int CW  = $clog2((NWN > NWE ? NWN : NWE) + 1);
  localparam int RCW = $clog2(RF + 1);

  typedef enum logic [2:0] {S_IDLE, S_RESET, S_ADD, S_DRAIN, S_SUM} state_t;
  state_t state;

  logic [ED-1:0][W-1:0] interim [PF][N_NODES];

  logic [CW-1:0]  it;
  logic [RCW-1:0] rtmr;
  logic           tick, last_it, add_q;
  logic [CW-1:0]  add_it_q;
  logic [PF-1:0][ED-1:0][W-1:0] sums;

  assign busy    = (state != S_IDLE);
  assign tick    = (rtmr == '0);
  assign last_it = (state == S_ADD) ? (int'(it) == NWE - 1) : (int'(it) == NWN - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      it       <= '0;
      rtmr     <= '0;
      add_q    <= 1'b0;
      add_it_q <= '0;
    end else begin
      add_q    <= (state == S_ADD) && tick;
      add_it_q <= it;
      if (state != S_IDLE && state != S_DRAIN)
        rtmr <= (int'(rtmr) == RF - 1) ? '0 : rtmr + RCW'(1);
      case (state)
        S_IDLE: if (eu_valid && ix_valid && o_ready) begin
          state <= S_RESET;
          it    <= '0;
          rtmr  <= '0;
        end
        S_RESET, S_ADD, S_SUM: if (tick) begin
          it <= last_it ? '0 : it + CW'(1);
          if (last_it) begin
            if (state == S_RESET)     state <= S_ADD;
            else if (state == S_ADD)  state <= S_DRAIN;
            else                      state <= S_IDLE;
            rtmr <= '0;
          end
        end
        S_DRAIN: state <= S_SUM;   // lets the last addition land
        default: state <= S_IDLE;
      endcase
    end
  end

  // ADD: addresses in the iteration cycle, accumulate one cycle later
  always_comb begin
    for (int l = 0; l < PF; l++) begin
      eu_raddr[l] = ERAW'(int'(it) * PF + l);
      ix_raddr[l] = ERAW'(int'(it) * PF + l);
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_RESET && tick) begin
      for (int l = 0; l < PF; l++) begin
        if (int'(it) * PF + l < N_NODES)
          for (int j = 0; j < PF; j++) interim[j][int'(it) * PF + l] <= '0;
      end
    end
    if (add_q) begin
      for (int l = 0; l < PF; l++) begin
        if (int'(add_it_q) * PF + l < N_EDGES) begin
          automatic int recv = int'(ix_rdata[l][0 +: NIW]);
          if (recv < N_NODES)
            for (int k = 0; k < ED; k++)
              interim[l][recv][k] <= interim[l][recv][k] + eu_rdata[l][k*W +: W];
        end
      end
    end
  end

  // SUM: fold the PF copies of PF nodes into one beat
  always_comb begin
    for (int l = 0; l < PF; l++) begin
      automatic int n = int'(it) * PF + l;
      for (int k = 0; k < ED; k++) begin
        sums[l][k] = '0;
        if (n < N_NODES)
          for (int j = 0; j < PF; j++) sums[l][k] = sums[l][k] + interim[j][n][k];
      end
    end
  end

  assign o_we       = (state == S_SUM) && tick;
  assign o_waddr    = NWAW'(it);
  assign o_wdata    = sums;
  assign o_commit   = o_we && last_it;
  assign eu_release = o_commit;
  assign ix_release = o_commit;

endmodule
