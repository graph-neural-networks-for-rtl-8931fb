// gnn_pkg: dimensions shared by every block of the interaction-network (IN)
// accelerator for track-segment classification.
//
// The network shape follows the paper: hits carry 3 features (r, phi, z),
// edges carry 4 features (dr, dphi, dz, dR), every MLP has two hidden layers
// of 8 units, phi_R1 maps 10 -> 4, phi_O maps 7 -> 3 and phi_R2 maps 10 -> 1.
// That gives 196 + 163 + 169 = 528 trainable parameters, the count the paper
// quotes. The order in which the parameters are stored (weights of layer 1
// row-major [out][in], biases of layer 1, then layer 2, then layer 3; MLPs in
// the order phi_R1, phi_O, phi_R2) is this design's own choice.
package gnn_pkg;

  localparam int NODE_DIM = 3;   // x_i  = (r, phi, z)
  localparam int EDGE_DIM = 4;   // a_ij = (dr, dphi, dz, dR)
  localparam int HIDDEN   = 8;   // hidden units per MLP layer

  // phi_R1(x_i, x_j, a_ij) -> a'_ij
  localparam int R1_IN  = 2 * NODE_DIM + EDGE_DIM;
  localparam int R1_OUT = EDGE_DIM;
  // phi_O(x_i, abar'_i) -> x'_i
  localparam int O_IN   = NODE_DIM + EDGE_DIM;
  localparam int O_OUT  = NODE_DIM;
  // phi_R2(x'_i, x'_j, a'_ij) -> a''_ij
  localparam int R2_IN  = 2 * NODE_DIM + EDGE_DIM;
  localparam int R2_OUT = 1;

  // Number of weights and biases of a 3-layer MLP nin -> H -> H -> nout.
  function automatic int mlp_npar(input int nin, input int nout);
    return nin * HIDDEN + HIDDEN + HIDDEN * HIDDEN + HIDDEN + HIDDEN * nout + nout;
  endfunction

  localparam int R1_NPAR = mlp_npar(R1_IN, R1_OUT);   // 196
  localparam int O_NPAR  = mlp_npar(O_IN, O_OUT);     // 163
  localparam int R2_NPAR = mlp_npar(R2_IN, R2_OUT);   // 169
  localparam int TOTAL_NPAR = R1_NPAR + O_NPAR + R2_NPAR;  // 528

  localparam int R1_BASE = 0;
  localparam int O_BASE  = R1_NPAR;
  localparam int R2_BASE = R1_NPAR + O_NPAR;

endpackage
