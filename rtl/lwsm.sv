// lwsm: light-weight softmax, an approximate softmax without exponent or divider.
//
// Softmax(x_i) = e^x_i / sum_j e^x_j is approximated with e^x ~ 1 + x and with
// the division replaced by a difference of bit positions:
//   In1     = Out + 1                     (Out: the value reaching the block)
//   UpdGcnt = CurrGcnt + In1              (running sum of 1 + x)
//   DIFF    = pos(ref) - pos(In1)         (pos: index of the leading '1')
//   y       = 1 >> DIFF                   (a power of two, ~ In1 / sum)
// where ref is UpdGcnt while the sum is being built (sm_acc = 1) and the final
// CurrGcnt when a completed sum is reused (sm_acc = 0, a second pass over the
// same inputs).  y is a W-bit fraction in which 1.0 is 2^(W-1).
// The leading-one search runs from the LSB upward, as the paper does, because
// the sums stay small.
//
// Follows the paper: the 1+x, the running count, the two find-first-'1'
// positions, their difference and the final shift, and the 8-bit registers of
// its example.  This design's choices: In1 and the running sum saturate at
// 2^W-1, a negative x gives In1 = 0 and y = 0, a negative difference is taken as
// zero, and the single shared adder of the paper's custom circuit is written as
// an adder and a subtractor.
//
// Timing: y is combinational from x and the registered CurrGcnt; `acc` adds In1
// to CurrGcnt at the clock edge, `clr` empties it.
module lwsm
  import abi_pkg::*;
#(
  parameter int unsigned W    = 8,
  parameter int unsigned AWID = AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [AWID-1:0] x,        // Out
  input  logic                   sm_acc,   // compare against the updated sum
  input  logic                   acc,      // commit UpdGcnt
  input  logic                   clr,      // CurrGcnt <= 0
  output logic [W-1:0]           y,
  output logic [W-1:0]           gcnt      // CurrGcnt
);

  localparam int unsigned PW = $clog2(W) + 1;

  logic signed [AWID:0] in1_full;
  logic [W-1:0]         in1, upd, refv;
  logic [W:0]           upd_full;
  logic [PW-1:0]        pos_in1, pos_ref;
  logic                 nz_in1, nz_ref;
  logic [PW-1:0]        diff;

  // In1 = Out + '1', clipped to [0, 2^W-1]
  always_comb begin
    in1_full = (AWID+1)'(x) + (AWID+1)'(1);
    if (in1_full < 0)                          in1 = '0;
    else if (in1_full > (AWID+1)'((1 << W) - 1)) in1 = '1;
    else                                       in1 = in1_full[W-1:0];
  end

  // UpdGcnt = CurrGcnt + In1, saturating
  assign upd_full = {1'b0, gcnt} + {1'b0, in1};
  assign upd      = upd_full[W] ? '1 : upd_full[W-1:0];
  assign refv     = sm_acc ? upd : gcnt;

  // leading '1' positions, searched from the LSB upward
  always_comb begin
    pos_in1 = '0; nz_in1 = 1'b0;
    pos_ref = '0; nz_ref = 1'b0;
    for (int i = 0; i < W; i++) begin
      if (in1[i])  begin pos_in1 = PW'(i); nz_in1 = 1'b1; end
      if (refv[i]) begin pos_ref = PW'(i); nz_ref = 1'b1; end
    end
  end

  assign diff = (pos_ref > pos_in1) ? pos_ref - pos_in1 : '0;

  always_comb begin
    if (!nz_in1 || !nz_ref) y = '0;
    else                    y = (W'(1) << (W - 1)) >> diff;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   gcnt <= '0;
    else if (clr) gcnt <= '0;
    else if (acc) gcnt <= upd;
  end

endmodule
