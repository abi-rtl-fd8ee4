// prog_regs: the programmable registers (PRs) shared by the NM/NRF logic.
//
// The PRs hold the configuration that an ABI instruction programs before it
// computes: the per-stage disables St[X]Dis, TH_ACT / SP_ACT / SM_ACT, the memory
// level NRF_M, the mode BIT_ELSER, the width BIT_WID and REG''.  The register
// names and meanings follow the paper; the addresses, the extra registers
// (sparsity window, CA subtract and bias, softmax accumulate) and the reset
// values are this design's choices (see abi_pkg).
//
// Interface and timing: a write (we, addr, wdata) takes effect on the next
// clock edge and is visible on `pr` from then on.  A write to the ACT register
// also pulses `sp_arm` (re-arming the sparsity monitor); a write to PR_SM_CLR
// pulses `sm_clr` (emptying the softmax running sum).  `sp_off` from the
// sparsity monitor clears SP_ACT.  BIT_WID writes are clipped to 1..16.
module prog_regs
  import abi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        we,
  input  pr_addr_e    addr,
  input  logic [31:0] wdata,
  input  logic        sp_off,
  output pr_t         pr,
  output logic        sp_arm,
  output logic        sm_clr
);

  logic [4:0] bw_w;

  always_comb begin
    if (wdata[4:0] == 5'd0)        bw_w = 5'd1;
    else if (wdata[4:0] > 5'd16)   bw_w = 5'd16;
    else                           bw_w = wdata[4:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr     <= PR_RESET;
      sp_arm <= 1'b0;
      sm_clr <= 1'b0;
    end else begin
      sp_arm <= 1'b0;
      sm_clr <= 1'b0;
      if (sp_off) pr.sp_act <= 1'b0;
      if (we) begin
        unique case (addr)
          PR_ST_DIS:  pr.st_dis    <= wdata[NSE-1:0];
          PR_ACT: begin
            pr.th_act <= wdata[0];
            pr.sp_act <= wdata[1];
            pr.sm_act <= wdata[2];
            pr.sm_acc <= wdata[3];
            sp_arm    <= 1'b1;
          end
          PR_NRF_M:   pr.nrf_m     <= level_e'(wdata[1:0]);
          PR_BEL:     pr.bit_elser <= wdata[1:0];
          PR_BW:      pr.bit_wid   <= bw_w;
          PR_REG2:    pr.reg2      <= wdata[DW-1:0];
          PR_SP_WIN:  pr.sp_win    <= wdata[15:0];
          PR_CA_SUB:  pr.ca_sub    <= wdata[0];
          PR_CA_BIAS: pr.ca_bias   <= wdata;
          PR_SM_CLR:  sm_clr       <= 1'b1;
          default: ;
        endcase
      end
    end
  end

endmodule
