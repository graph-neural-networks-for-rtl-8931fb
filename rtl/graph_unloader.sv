// graph_unloader: output interface. Streams the edge weights a''_ij of a
// finished graph out of the final buffer, PF edges per beat in edge order
// (edge i in lane i % PF of beat i / PF), with valid/ready flow control.
//
// w_last marks the final beat of a graph and w_lanes says which lanes of a
// beat carry real edges (all but the tail of the last beat when N_EDGES is
// not a multiple of PF). The buffer is read one beat ahead: the read address
// is the next beat once the current one is taken, so a consumer that keeps
// w_ready high receives one beat per cycle after a one-cycle start-up. After
// the last beat is taken the buffer bank is released.
module graph_unloader #(
  parameter int N_EDGES = 896,
  parameter int PF      = 16,
  parameter int W       = 14,
  parameter int OD      = 1,
  parameter int ERAW    = $clog2(N_EDGES + 1),
  parameter int EWAW    = $clog2((N_EDGES + PF - 1) / PF + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      c_valid,
  output logic                      c_release,
  output logic [PF-1:0][ERAW-1:0]   raddr,
  input  logic [PF-1:0][OD*W-1:0]   rdata,
  output logic                      w_valid,
  input  logic                      w_ready,
  output logic [PF-1:0][OD*W-1:0]   w_data,
  output logic [PF-1:0]             w_lanes,
  output logic                      w_last
);

  localparam int NW = (N_EDGES + PF - 1) / PF;

  logic            active, primed, fire;
  logic [EWAW-1:0] beat, beat_nxt;

  assign fire     = w_valid && w_ready;
  assign w_valid  = active && primed;
  assign w_last   = (int'(beat) == NW - 1);
  assign w_data   = rdata;
  assign beat_nxt = (fire && !w_last) ? beat + EWAW'(1) : beat;
  assign c_release = fire && w_last;

  always_comb begin
    for (int l = 0; l < PF; l++) begin
      raddr[l]   = ERAW'(int'(beat_nxt) * PF + l);
      w_lanes[l] = (int'(beat) * PF + l < N_EDGES);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      primed <= 1'b0;
      beat   <= '0;
    end else begin
      if (!active) begin
        primed <= 1'b0;
        beat   <= '0;
        if (c_valid) active <= 1'b1;
      end else begin
        primed <= 1'b1;
        beat   <= beat_nxt;
        if (c_release) begin
          active <= 1'b0;
          primed <= 1'b0;
          beat   <= '0;
        end
      end
    end
  end

endmodule
