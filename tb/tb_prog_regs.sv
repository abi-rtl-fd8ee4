// tb_prog_regs: every programmable register is written with random data and
// read back through the pr record; the reset values, the BIT_WID clipping, the
// sp_arm / sm_clr pulses and the clearing of SP_ACT by sp_off are checked.
module tb_prog_regs;
  import abi_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we, sp_off, sp_arm, sm_clr;
  pr_addr_e addr;
  logic [31:0] wdata;
  pr_t pr;
  int checks = 0, failures = 0;

  prog_regs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic wr(input pr_addr_e a, input logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  logic [31:0] d;
  initial begin
    we = 0; sp_off = 0; addr = PR_ST_DIS; wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check("reset bw", pr.bit_wid, 8);
    check("reset win", pr.sp_win, 511);
    check("reset reg2", pr.reg2, 1);
    for (int t = 0; t < 20; t++) begin
      d = $urandom;
      wr(PR_ST_DIS, d);  check("st_dis", pr.st_dis, d[5:0]);
      d = $urandom;
      wr(PR_ACT, d);
      check("th_act", pr.th_act, d[0]); check("sp_act", pr.sp_act, d[1]);
      check("sm_act", pr.sm_act, d[2]); check("sm_acc", pr.sm_acc, d[3]);
      d = $urandom;
      wr(PR_NRF_M, d);   check("nrf_m", pr.nrf_m, d[1:0]);
      wr(PR_BEL, d);     check("bel", pr.bit_elser, d[1:0]);
      d = $urandom_range(1, 16);
      wr(PR_BW, d);      check("bw", pr.bit_wid, d);
      d = $urandom;
      wr(PR_REG2, d);    check("reg2", pr.reg2, $signed(d[15:0]));
      wr(PR_SP_WIN, d);  check("win", pr.sp_win, d[15:0]);
      wr(PR_CA_SUB, d);  check("ca_sub", pr.ca_sub, d[0]);
      wr(PR_CA_BIAS, d); check("bias", pr.ca_bias, $signed(d));
    end
    wr(PR_BW, 0);  check("bw clip low", pr.bit_wid, 1);
    wr(PR_BW, 31); check("bw clip high", pr.bit_wid, 16);
    // pulses
    @(negedge clk); we = 1; addr = PR_ACT; wdata = 32'h2;
    @(posedge clk); #1; check("sp_arm", sp_arm, 1); we = 0;
    @(posedge clk); #1; check("sp_arm one cycle", sp_arm, 0);
    check("sp_act set", pr.sp_act, 1);
    @(negedge clk); we = 1; addr = PR_SM_CLR;
    @(posedge clk); #1; check("sm_clr", sm_clr, 1); we = 0;
    @(negedge clk); sp_off = 1; @(negedge clk); sp_off = 0;
    check("sp_off clears", pr.sp_act, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
