// weight_store: register file holding the 528 trained weights and biases of
// the interaction network.
//
// The HLS flow the design comes from compiles the weights into the firmware
// as constants; here they are loaded at run time through a simple write port
// (wt_we, wt_addr, wt_data), one W-bit word per cycle, which lets one
// bitstream serve any trained model. The address map is gnn_pkg's: phi_R1 at
// 0..195, phi_O at 196..358, phi_R2 at 359..527. The three outputs are the
// parameter vectors of the three MLPs; a write is visible on them in the
// next cycle. Registers are cleared by reset. Weights should only be changed
// while no graph is being processed.
module weight_store
  import gnn_pkg::*;
#(
  parameter int W = 14
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wt_we,
  input  logic [$clog2(TOTAL_NPAR)-1:0] wt_addr,
  input  logic [W-1:0]                 wt_data,
  output logic [R1_NPAR-1:0][W-1:0]    p_r1,
  output logic [O_NPAR-1:0][W-1:0]     p_o,
  output logic [R2_NPAR-1:0][W-1:0]    p_r2
);

  logic [TOTAL_NPAR-1:0][W-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0;
    end else if (wt_we && (int'(wt_addr) < TOTAL_NPAR)) begin
      mem[wt_addr] <= wt_data;
    end
  end

  assign p_r1 = mem[R1_BASE +: R1_NPAR];
  assign p_o  = mem[O_BASE  +: O_NPAR];
  assign p_r2 = mem[R2_BASE +: R2_NPAR];

endmodule
