// scaler: the scaler (S) between the central adder and the thresholding block.
//
// Divides the reduced value by REG'' (signed division, rounding toward zero),
// the 1/a_ii of the Jacobi update, the neighbour count of GCN combination and the
// embedding-size scale of attention.  With Se5 set the value passes unchanged;
// a zero REG'' also passes it unchanged.
//
// That S takes REG'' and that it divides (8 scaled by REG''=2 gives 4, 8 by 4
// gives 2) follows the paper's examples; a full divider is this design's choice,
// the paper does not say how the scale is built.
//
// Interface: combinational.
module scaler
  import abi_pkg::*;
#(
  parameter int unsigned DWID = DW,
  parameter int unsigned AWID = AW
) (
  input  logic signed [AWID-1:0] din,
  input  logic signed [DWID-1:0] reg2,    // REG''
  input  logic                   bypass,  // Se5
  output logic signed [AWID-1:0] dout
);

  logic signed [AWID-1:0] div;

  assign div  = AWID'(reg2);
  assign dout = (bypass || div == '0) ? din : din / div;

endmodule
