// threshold: the thresholding block (TH) with the light-weight softmax inside.
//
// Three multiplexers in a row, as in the paper's drawing:
//   S[MSB] selects between S and 0       -> ReLU(S)
//   TH_ACT selects ReLU(S) (1) or S (0)
//   SM_ACT selects the LWSM output (1) or the value above (0)
// The LWSM takes the value after the TH_ACT multiplexer.  With TH_ACT = 0 and
// SM_ACT = 0 the block is used for comparison (Ising spin decision, L1-norm
// convergence test): the value passes, and `gt0` reports S > 0.
// The multiplexer chain and its selects follow the paper; the `gt0` flag and the
// zero-extension of the W-bit softmax fraction onto the data path are this
// design's choices.
//
// Timing: combinational, except for the LWSM running sum (see lwsm).
module threshold
  import abi_pkg::*;
#(
  parameter int unsigned AWID = AW,
  parameter int unsigned SMW  = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [AWID-1:0] s,        // from the scaler
  input  logic                   th_act,   // TH_ACT
  input  logic                   sm_act,   // SM_ACT
  input  logic                   sm_acc,   // LWSM: build the sum with this value
  input  logic                   sm_commit,// LWSM: commit this value to the sum
  input  logic                   sm_clr,   // LWSM: clear the sum
  output logic signed [AWID-1:0] out,      // OUT
  output logic                   gt0       // comparison result S > 0
);

  logic signed [AWID-1:0] relu, v;
  logic [SMW-1:0]         y, gcnt_unused;

  assign relu = s[AWID-1] ? '0 : s;
  assign v    = th_act ? relu : s;
  assign gt0  = !s[AWID-1] && (s != '0);

  lwsm #(.W(SMW), .AWID(AWID)) u_lwsm (
    .clk   (clk),
    .rst_n (rst_n),
    .x     (v),
    .sm_acc(sm_acc),
    .acc   (sm_commit && sm_act && sm_acc),
    .clr   (sm_clr),
    .y     (y),
    .gcnt  (gcnt_unused)
  );

  assign out = sm_act ? AWID'(y) : v;

endmodule
