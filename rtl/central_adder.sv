// central_adder: the central adder (CA) that reduces the bank outputs S4[i].
//
// Each bank output reaches the adder tree through a leg that can be forced to
// zero.  Element-parallel (EP): every leg is open and the whole reduction is
// done in one pass.  Element-serial (ES): only the leg of bank `bank_sel` is
// open, the rest are zero, and the adder adds that one bank to a running sum
// held in its register, one bank per `step`.  Optionally (ca_sub) the adder
// returns bias - sum, the subtraction used for the Jacobi update of linear
// programming (b_i - sum a_ij x_j) and for the negated Ising field.
//
// The EP/ES behaviour with zero-forced legs follows the paper; the ES register,
// the bias and the subtract mode are this design's choices (the paper says only
// that the CA "performs subtraction").
//
// Timing: `sum` is combinational.  In ES mode `first` marks the step whose
// running sum starts from zero; the register takes the new value on `step`.
module central_adder
  import abi_pkg::*;
#(
  parameter int unsigned NB   = 16,
  parameter int unsigned AWID = AW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [AWID-1:0] s4 [NB],   // bank outputs
  input  logic                   es,        // B_EL[1]: 1 element-serial
  input  logic [$clog2(NB)-1:0]  bank_sel,  // ES: bank being reduced
  input  logic                   first,     // ES: start of a new reduction
  input  logic                   step,      // ES: accumulate this bank
  input  logic                   sub,
  input  logic signed [AWID-1:0] bias,
  output logic signed [AWID-1:0] sum
);

  logic signed [AWID-1:0] leg [NB];
  logic signed [AWID-1:0] red, base, acc_q;

  always_comb begin
    red = '0;
    for (int i = 0; i < NB; i++) begin
      leg[i] = (!es || i == int'(bank_sel)) ? s4[i] : '0;
      red += leg[i];
    end
    base = (es && !first) ? acc_q : '0;
  end

  assign sum = sub ? bias - (base + red) : base + red;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              acc_q <= '0;
    else if (es && step)     acc_q <= base + red;
  end

endmodule
