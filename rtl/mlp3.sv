// mlp3: the three-layer perceptron used for phi_R1, phi_O and phi_R2.
//
// Shape from the paper: N_IN -> 8 -> 8 -> N_OUT with ReLU on both hidden
// layers; the last layer is linear, or followed by a sigmoid when SIGMOID is
// set (phi_R2). The three dense layers are chained back to back, so a new
// input vector is accepted every RF cycles and the result appears 3*RF cycles
// after in_valid (the sigmoid is combinational on the last layer's register).
//
// params holds the MLP's weights and biases as one flat vector in the order
// W1[out][in], b1, W2[out][in], b2, W3[out][in], b3 (index 0 first). It is
// expected to be stable while vectors are in flight.
module mlp3 #(
  parameter int N_IN    = 10,
  parameter int N_OUT   = 4,
  parameter int H       = 8,
  parameter int RF      = 1,
  parameter int W       = 14,
  parameter int F       = 7,
  parameter bit SIGMOID = 1'b0,
  parameter int NPAR    = N_IN * H + H + H * H + H + H * N_OUT + N_OUT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NPAR-1:0][W-1:0] params,
  input  logic                   in_valid,
  input  logic [N_IN-1:0][W-1:0] x,
  output logic                   out_valid,
  output logic [N_OUT-1:0][W-1:0] y
);

  localparam int O_W1 = 0;
  localparam int O_B1 = O_W1 + N_IN * H;
  localparam int O_W2 = O_B1 + H;
  localparam int O_B2 = O_W2 + H * H;
  localparam int O_W3 = O_B2 + H;
  localparam int O_B3 = O_W3 + H * N_OUT;

  initial begin
    if (NPAR != O_B3 + N_OUT) $error("mlp3: NPAR does not match the layer sizes");
  end

  logic [H-1:0][N_IN-1:0][W-1:0] w1;
  logic [H-1:0][H-1:0][W-1:0]    w2;
  logic [N_OUT-1:0][H-1:0][W-1:0] w3;
  logic [H-1:0][W-1:0]           b1, b2;
  logic [N_OUT-1:0][W-1:0]       b3;

  assign w1 = params[O_W1 +: N_IN * H];
  assign b1 = params[O_B1 +: H];
  assign w2 = params[O_W2 +: H * H];
  assign b2 = params[O_B2 +: H];
  assign w3 = params[O_W3 +: H * N_OUT];
  assign b3 = params[O_B3 +: N_OUT];

  logic                    v1, v2;
  logic [H-1:0][W-1:0]     h1, h2;
  logic [N_OUT-1:0][W-1:0] z;

  dense_layer #(.N_IN(N_IN), .N_OUT(H), .RF(RF), .W(W), .F(F), .RELU(1'b1)) u_l1 (
    .clk, .rst_n, .in_valid(in_valid), .x(x), .wt(w1), .bias(b1), .out_valid(v1), .y(h1));
  dense_layer #(.N_IN(H), .N_OUT(H), .RF(RF), .W(W), .F(F), .RELU(1'b1)) u_l2 (
    .clk, .rst_n, .in_valid(v1), .x(h1), .wt(w2), .bias(b2), .out_valid(v2), .y(h2));
  dense_layer #(.N_IN(H), .N_OUT(N_OUT), .RF(RF), .W(W), .F(F), .RELU(1'b0)) u_l3 (
    .clk, .rst_n, .in_valid(v2), .x(h2), .wt(w3), .bias(b3), .out_valid(out_valid), .y(z));

  generate
    if (SIGMOID) begin : g_sig
      for (genvar o = 0; o < N_OUT; o++) begin : g_o
        sigmoid_pwl #(.W(W), .F(F)) u_sig (.x(z[o]), .y(y[o]));
      end
    end else begin : g_lin
      assign y = z;
    end
  endgenerate

endmodule
