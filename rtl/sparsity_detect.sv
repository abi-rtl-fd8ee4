// sparsity_detect: per-bank zero detector that produces SpEn.
//
// Each sub-bank watches the word read from its memory (VRF/L1/L2) and the value
// in its REG.  If either is zero the product is zero, so SpEn is raised and the
// bank's RCE stages St1..St3 are gated (their registers hold, their outputs are
// zero).  Detection only runs while SP_ACT is programmed on and the sparsity
// monitor keeps it enabled (Mon_En); otherwise SpEn stays low and the detector
// costs nothing.  The inputs Q, SP_ACT, M[B] and Mon_En are those the paper
// draws for this gate; comparing whole words against zero is this design's
// reading of "if any are zero".
//
// Interface: purely combinational, no clock.
module sparsity_detect
  import abi_pkg::*;
#(
  parameter int unsigned DWID = DW
) (
  input  logic [DWID-1:0] m,        // M[B]: bank read
  input  logic [DWID-1:0] q,        // Q: REG value
  input  logic            sp_act,   // SP_ACT
  input  logic            mon_en,   // Mon_En from the sparsity monitor
  output logic            spen      // SpEn
);

  logic m_zero, q_zero;

  assign m_zero = (m == '0);
  assign q_zero = (q == '0);
  assign spen   = sp_act && mon_en && (m_zero || q_zero);

endmodule
