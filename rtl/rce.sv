// rce: reconfigurable compute engine of one memory sub-bank (stages St0..St4).
//
// The engine multiplies the word read from its bank (a) by the value held in the
// bank's REG (q) and accumulates the products, in five stages that can each be
// bypassed:
//   St0  bit-wise partial products: a AND q[k] (the word, or zero).
//   St1  shifts partial product k left by k; products of bit k >= BIT_WID are
//        masked to zero ("B<W").  Bypassed, only bit 0 passes, unshifted.
//   St2  bit-serial accumulation register.  In bit-serial (BS) mode one REG bit
//        is taken per cycle and St2 sums the shifted products; in bit-parallel
//        (BP) mode St1 sums all enabled products in one cycle and St2 is bypassed.
//   St3  accumulates St2 results over successive elements (longer dot products).
//   St4  multiplies the St3 result by REG''.
// The stage list, the AND/shift/mask structure, the St2 register used only in BS
// mode and the St4 multiply by REG'' follow the paper.  This design's choices:
// REG holds a two's-complement number BIT_WID bits wide, so the product of its
// top bit is subtracted (a negative weight); a bypassed St0 passes the word
// unmultiplied (a plain load for reductions); when the sparsity enable spen is
// high the stages St1..St3 contribute zero and their registers hold.
//
// Interface and timing: se[X] bypasses stage X.  In BS mode the controller
// raises `step` once per bit with bit_idx = 0..BIT_WID-1; St2 loads on bit 0 and
// accumulates afterwards.  `commit` (on the last bit in BS mode, or on the
// single compute cycle in BP mode) loads St3; acc_clr starts a new sum.
// s3/s4 are the combinational values of this cycle (what St3 will hold after
// commit); s4_reg is St4 applied to the registered St3 value.
module rce
  import abi_pkg::*;
#(
  parameter int unsigned DWID = DW,
  parameter int unsigned AWID = AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [DWID-1:0] a,        // bank read (L1/L2/VRF word)
  input  logic        [DWID-1:0] q,        // REG
  input  logic        [4:0]      bw,       // BIT_WID (1..DWID)
  input  logic        [3:0]      bit_idx,  // current bit in BS mode
  input  logic                   bs,       // 1: bit-serial, 0: bit-parallel
  input  logic        [4:0]      se,       // stage bypass selects Se0..Se4
  input  logic signed [DWID-1:0] reg2,     // REG''
  input  logic                   spen,     // sparsity gate for St1..St3
  input  logic                   step,     // BS: update St2
  input  logic                   commit,   // update St3
  input  logic                   acc_clr,  // St3 starts from zero
  output logic signed [AWID-1:0] s3,
  output logic signed [AWID-1:0] s4,
  output logic signed [AWID-1:0] s4_reg
);

  logic signed [AWID-1:0] a_ext;
  logic signed [AWID-1:0] pp   [DWID];   // St0 outputs
  logic signed [AWID-1:0] term [DWID];   // St1 shifted, masked, signed
  logic signed [AWID-1:0] s1, s2;
  logic signed [AWID-1:0] st2_q, st3_q;
  logic signed [AWID-1:0] acc_base;
  logic signed [AWID-1:0] reg2_ext;

  assign a_ext = AWID'(a);

  // St0: AND of the bank word with each REG bit (bypassed: word passes as bit 0)
  always_comb begin
    for (int k = 0; k < DWID; k++) begin
      if (se[0]) pp[k] = (k == 0) ? a_ext : '0;
      else       pp[k] = q[k] ? a_ext : '0;
    end
  end

  // St1: shift by bit position, mask bits at or above BIT_WID, weight of the
  // sign bit is negative
  always_comb begin
    for (int k = 0; k < DWID; k++) begin
      if (k >= int'(bw)) begin
        term[k] = '0;
      end else if (k == int'(bw) - 1 && !se[0]) begin
        term[k] = -(pp[k] <<< k);
      end else begin
        term[k] = pp[k] <<< k;
      end
    end
  end

  always_comb begin
    if (spen) begin
      s1 = '0;
    end else if (se[1]) begin
      s1 = pp[0];
    end else if (bs) begin
      s1 = term[bit_idx];
    end else begin
      s1 = '0;
      for (int k = 0; k < DWID; k++) s1 += term[k];
    end
  end

  // St2: active only in bit-serial mode
  always_comb begin
    if (spen)                  s2 = '0;
    else if (bs && !se[2])     s2 = ((bit_idx == 4'd0) ? '0 : st2_q) + s1;
    else                       s2 = s1;
  end

  // St3: element accumulation
  assign acc_base = acc_clr ? '0 : st3_q;
  assign s3       = se[3] ? s2 : acc_base + s2;

  // St4: multiply by REG''
  // (low AWID bits of the product)
  assign reg2_ext = AWID'(reg2);
  assign s4       = se[4] ? s3    : s3 * reg2_ext;
  assign s4_reg   = se[4] ? st3_q : st3_q * reg2_ext;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st2_q <= '0;
      st3_q <= '0;
    end else begin
      if (step && !spen) st2_q <= s2;
      if (commit && (!spen || acc_clr)) st3_q <= s3;
    end
  end

endmodule
