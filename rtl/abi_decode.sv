// abi_decode: the decode/issue additions for ABI instructions in one slice
// (a compute unit, or the L2 slice).
//
// The GPU's decode stage gains logic for the new instructions that program and
// run the NM/NRF logic.  This block decodes them: PR writes, REG loads, memory
// fills of a sub-bank, and the fused VMAC operation with its per-instruction
// stage disables OP[X]DIS and its write-back requests (data[0]: write the
// result into the REG of sub-bank `bank`; data[1]: write it into the register
// file, sub-bank `bank`, word data[31:14]).  It also produces NM/RF_RDY: an instruction for this
// slice is held (stalled) while the slice's NM/NRF logic is busy, so that no
// configuration or operand changes under a running operation.
// The existence of the OP[x]DIS and NM/RF_RDY signals follows the paper; the
// instruction format (abi_pkg::inst_t) is this design's own, the paper maps its
// operations onto Southern Islands instructions without giving the encoding.
//
// Interface: combinational.  An instruction is consumed in the cycle where
// inst_valid and inst_ready are both high; the strobes are high in that cycle
// only.  Instructions whose `cu` field names another slice are ignored and do
// not stall.  Most output bits (the address, data, bank, level and OP[X]DIS
// fields) are the instruction's fields passed on unchanged; only the strobes,
// ready and stall are decoded logic.  The strobes qualify those fields, so the
// receivers never act on them outside a strobe.
module abi_decode
  import abi_pkg::*;
#(
  parameter int unsigned SLICE_ID = 0
) (
  input  inst_t           inst,
  input  logic            inst_valid,
  input  logic            nm_busy,      // this slice's NM/NRF logic is running
  output logic            inst_ready,   // NM/RF_RDY
  output logic            stall,
  output logic            pr_we,
  output pr_addr_e        pr_addr,
  output logic [31:0]     pr_wdata,
  output logic            reg_we,
  output logic            mem_we,
  output level_e          wr_lvl,
  output logic [4:0]      wr_bank,
  output logic [17:0]     wr_addr,
  output logic [DW-1:0]   wr_data,
  output logic            op_start,
  output logic [NSE-1:0]  op_dis,       // OP[X]DIS
  output logic            op_acc_clr,
  output logic            op_wb,        // VMAC: write the result into REG[bank]
  output logic            op_wbv,       // VMAC: write the result into the VRF
  output logic [17:0]     op_wbv_addr,  // ... at this word of sub-bank `bank`
  output logic [17:0]     op_addr
);

  logic sel, fire;

  assign sel        = (inst.cu == 4'(SLICE_ID)) && (inst.op != OP_NOP);
  assign inst_ready = !sel || !nm_busy;
  assign stall      = inst_valid && sel && nm_busy;
  assign fire       = inst_valid && sel && !nm_busy;

  assign pr_we      = fire && inst.op == OP_PRWR;
  assign pr_addr    = pr_addr_e'(inst.addr[3:0]);
  assign pr_wdata   = inst.data;
  assign reg_we     = fire && inst.op == OP_REGWR;
  assign mem_we     = fire && inst.op == OP_MEMWR;
  assign wr_lvl     = inst.lvl;
  assign wr_bank    = inst.bank;
  assign wr_addr    = inst.addr;
  assign wr_data    = inst.data[DW-1:0];
  assign op_start   = fire && inst.op == OP_VMAC;
  assign op_dis     = inst.op_dis;
  assign op_acc_clr = inst.acc_clr;
  assign op_wb       = inst.data[WB_REG_BIT];
  assign op_wbv      = inst.data[WB_VRF_BIT];
  assign op_wbv_addr = inst.data[31:14];
  assign op_addr    = inst.addr;

endmodule
