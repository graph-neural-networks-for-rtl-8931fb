// dense_layer: one fully connected layer y = act(W x + b) in signed fixed point.
//
// Every value is a W-bit two's-complement number with F fractional bits, the
// RTL counterpart of ap_fixed<W, W-F>. Products are summed at full precision,
// then the sum is truncated back to F fractional bits (floor) and wrapped to
// W bits, which is what ap_fixed does by default (AP_TRN, AP_WRAP). With RELU
// set, negative results become zero.
//
// Reuse factor: the layer owns N_OUT * ceil(N_IN/RF) multipliers and spends
// RF cycles on one input vector; in cycle c it handles the inputs whose index
// i satisfies i % RF == c. The initiation interval is therefore RF, the
// paper's definition of the reuse factor, and the latency is RF cycles.
//
// Interface: pulse in_valid with x; wt and bias must be stable while the layer
// works. out_valid pulses for one cycle exactly RF cycles later, and y holds
// the result until the next one. in_valid may not be raised again before the
// previous vector has finished (at most once every RF cycles).
module dense_layer #(
  parameter int N_IN  = 10,
  parameter int N_OUT = 8,
  parameter int RF    = 1,
  parameter int W     = 14,
  parameter int F     = 7,
  parameter bit RELU  = 1'b1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                in_valid,
  input  logic [N_IN-1:0][W-1:0]              x,
  input  logic [N_OUT-1:0][N_IN-1:0][W-1:0]   wt,
  input  logic [N_OUT-1:0][W-1:0]             bias,
  output logic                                out_valid,
  output logic [N_OUT-1:0][W-1:0]             y
);

  localparam int CH = (N_IN + RF - 1) / RF;            // products per output per cycle
  localparam int AW = 2 * W + $clog2(N_IN + 1) + 1;    // accumulator width
  localparam int CW = $clog2(RF + 1);

  logic [N_IN-1:0][W-1:0] x_q;
  logic [CW-1:0]          cnt;
  logic                   busy;
  logic signed [AW-1:0]   acc     [N_OUT];
  logic signed [AW-1:0]   acc_nxt [N_OUT];
  logic                   active, last;
  logic [N_OUT-1:0][W-1:0] y_nxt;

  assign active = in_valid || busy;

  always_comb begin
    automatic int c = in_valid ? 0 : int'(cnt);
    last = active && (c == RF - 1);
    for (int o = 0; o < N_OUT; o++) begin
      automatic logic signed [AW-1:0] s;
      automatic logic signed [AW-1:0] t;
      s = in_valid ? (AW'(signed'(bias[o])) <<< F) : acc[o];
      for (int k = 0; k < CH; k++) begin
        automatic int i = c + k * RF;
        if (i < N_IN) begin
          if (in_valid)
            s = s + AW'(signed'(x[i]) * signed'(wt[o][i]));
          else
            s = s + AW'(signed'(x_q[i]) * signed'(wt[o][i]));
        end
      end
      acc_nxt[o] = s;
      t = s >>> F;
      y_nxt[o] = t[W-1:0];
      if (RELU && y_nxt[o][W-1]) y_nxt[o] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (active) begin
        if (last) begin
          busy      <= 1'b0;
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          busy <= 1'b1;
          cnt  <= in_valid ? CW'(1) : cnt + CW'(1);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) x_q <= x;
    if (active) begin
      for (int o = 0; o < N_OUT; o++) acc[o] <= acc_nxt[o];
      if (last) y <= y_nxt;
    end
  end

  // A new vector may only start once the previous one has finished.
  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !busy)
    else $error("dense_layer: in_valid while busy");

endmodule
