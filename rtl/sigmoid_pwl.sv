// sigmoid_pwl: combinational sigmoid for the final edge weight.
//
// The paper only states that phi_R2 ends in a sigmoid. This design uses the
// piecewise-linear PLAN approximation, which needs only shifts and adds:
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   |x| < 1           : |x|/4  + 0.5
// and sigmoid(-x) = 1 - sigmoid(x). Its largest error against the exact
// sigmoid is about 0.019. Input and output are W-bit signed fixed point with F
// fractional bits (F >= 5 keeps the constants exact); the output lies in [0, 1].
module sigmoid_pwl #(
  parameter int W = 14,
  parameter int F = 7
) (
  input  logic [W-1:0] x,
  output logic [W-1:0] y
);

  localparam int IW = W + 2;
  localparam logic signed [IW-1:0] ONE   = IW'(1) <<< F;
  localparam logic signed [IW-1:0] FIVE  = IW'(5) <<< F;
  localparam logic signed [IW-1:0] B2375 = (IW'(19) <<< F) >>> 3;
  localparam logic signed [IW-1:0] C84   = (IW'(27) <<< F) >>> 5;
  localparam logic signed [IW-1:0] C625  = (IW'(5)  <<< F) >>> 3;
  localparam logic signed [IW-1:0] HALF  = ONE >>> 1;

  logic signed [IW-1:0] xs, ax, pos, res;

  always_comb begin
    xs = IW'(signed'(x));
    ax = (xs < 0) ? -xs : xs;
    if (ax >= FIVE)       pos = ONE;
    else if (ax >= B2375) pos = (ax >>> 5) + C84;
    else if (ax >= ONE)   pos = (ax >>> 3) + C625;
    else                  pos = (ax >>> 2) + HALF;
    res = (xs < 0) ? ONE - pos : pos;
    y   = res[W-1:0];
  end

endmodule
