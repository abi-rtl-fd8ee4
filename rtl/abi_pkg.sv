// abi_pkg: types and constants shared by the near-memory / near-register-file
// (NM/NRF) compute logic.
//
// The configuration record pr_t mirrors the programmable registers (PRs) of the
// design: per-stage disables St[X]Dis, the TH/SP/SM enables, the memory-level
// select NRF_M, the serial/parallel mode BIT_ELSER, the compute width BIT_WID and
// the REG'' operand used by stage 4 and the scaler. Those names follow the paper.
// The sparsity window, the central-adder subtract mode with its bias, the
// softmax accumulate bit, the register addresses, the instruction format and
// the placement of the write-back request bits are this design's own choices.
package abi_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned DW     = 16;   // widest operand: INT16
  localparam int unsigned AW     = 32;   // accumulator / reduction width
  localparam int unsigned NSE    = 6;    // stage selects Se0..Se5 (Se5: scaler)

  // ---------------- memory levels (NRF_M) ----------------
  typedef enum logic [1:0] {
    LVL_RF = 2'd0,   // near-register-file (NRF)
    LVL_L1 = 2'd1,   // near-L1 (NM)
    LVL_L2 = 2'd2    // near-L2 (NM)
  } level_e;

  // ---------------- programmable registers ----------------
  typedef struct packed {
    logic [NSE-1:0]    st_dis;     // St[X]Dis: bit X bypasses RCE stage X, bit 5 the scaler
    logic              th_act;     // TH_ACT : ReLU on
    logic              sp_act;     // SP_ACT : sparsity detection on
    logic              sm_act;     // SM_ACT : softmax (LWSM) on
    logic              sm_acc;     // softmax: add this output to the running sum
    level_e            nrf_m;      // NRF_M  : which memory level computes
    logic [1:0]        bit_elser;  // BIT_ELSER: [0]=1 bit-serial, [1]=1 element-serial
    logic [4:0]        bit_wid;    // BIT_WID: 1..16
    logic signed [DW-1:0] reg2;    // REG''  : stage-4 multiplier and scaler divisor
    logic [15:0]       sp_win;     // sparsity-monitor window minus one (default 511)
    logic              ca_sub;     // CA output = bias - sum
    logic signed [AW-1:0] ca_bias; // bias for ca_sub (b_i, h_i)
  } pr_t;

  // PR addresses for a PR write
  typedef enum logic [3:0] {
    PR_ST_DIS  = 4'd0,
    PR_ACT     = 4'd1,   // data[0]=th_act [1]=sp_act [2]=sm_act [3]=sm_acc
    PR_NRF_M   = 4'd2,
    PR_BEL     = 4'd3,
    PR_BW      = 4'd4,
    PR_REG2    = 4'd5,
    PR_SP_WIN  = 4'd6,
    PR_CA_SUB  = 4'd7,
    PR_CA_BIAS = 4'd8,
    PR_SM_CLR  = 4'd9    // write strobe only: clears the LWSM running sum
  } pr_addr_e;

  localparam pr_t PR_RESET = '{
    st_dis:    '0,
    th_act:    1'b0,
    sp_act:    1'b0,
    sm_act:    1'b0,
    sm_acc:    1'b0,
    nrf_m:     LVL_RF,
    bit_elser: 2'b00,
    bit_wid:   5'd8,
    reg2:      16'sd1,
    sp_win:    16'd511,
    ca_sub:    1'b0,
    ca_bias:   '0
  };

  // ---------------- instructions ----------------
  typedef enum logic [3:0] {
    OP_NOP   = 4'd0,
    OP_PRWR  = 4'd1,   // write PR 'addr[3:0]' with 'data'
    OP_REGWR = 4'd2,   // write REG of bank 'bank' with data[15:0]
    OP_MEMWR = 4'd3,   // write word 'addr' of bank 'bank' at level 'lvl'
    OP_VMAC  = 4'd4    // fused load + MAC + reduce + scale + threshold
  } opcode_e;

  typedef struct packed {
    opcode_e            op;       // 4
    logic [3:0]         cu;       // 4  target slice (CU index, or the L2 slice)
    level_e             lvl;      // 2  level for OP_MEMWR
    logic [4:0]         bank;     // 5
    logic [NSE-1:0]     op_dis;   // 6  OP[X]DIS of this instruction
    logic               acc_clr;  // 1  VMAC: start a new St3 accumulation
    logic [17:0]        addr;     // 18
    logic [31:0]        data;     // 32
  } inst_t;                       // 72 bits

  localparam int unsigned INST_W = $bits(inst_t);

  // VMAC write-back fields carried in inst.data
  //   data[0]      write the result into REG[bank] of the unit that computed
  //   data[1]      write the result into the register file, sub-bank `bank`,
  //                word data[31:14] (compute-unit slices only)
  localparam int unsigned WB_REG_BIT = 0;
  localparam int unsigned WB_VRF_BIT = 1;

  // an accumulator value saturated to a DW-bit operand (for write-back)
  function automatic logic [DW-1:0] sat_dw(input logic signed [AW-1:0] v);
    localparam logic signed [AW-1:0] MAXV = AW'((longint'(1) <<< (DW - 1)) - 1);
    if (v > MAXV)            return MAXV[DW-1:0];
    else if (v < -MAXV - 1)  return DW'(1) << (DW - 1);
    else                     return v[DW-1:0];
  endfunction

endpackage
