// tb_abi_top_full: the top at its default size (8 CU slices + the L2 slice,
// 16 sub-banks, 256 KB VRF and 128 KB L1 per CU, 4 MB L2), one complete
// operation per memory level.
//
// CU 7 gets the 3x3-window example (-1 in eight banks of memory and REG) at the
// last register-file word, through the scan chain, and must return 8 on SO
// after a 2-cycle operation; the same data at the last L1 word must give 8 in 4
// cycles; the L2 slice gets a dense 16-element dot product at the last L2 word
// and must return the sum in 10 cycles.
module tb_abi_top_full;
  import abi_pkg::*;

  logic clk = 0, rst_n = 0;
  logic se, si, upd, so, inst_valid, inst_ready, done, gt0, stall, spen_any;
  inst_t inst;
  logic signed [31:0] result;
  logic [8:0] slice_busy, mon_en;
  int checks = 0, failures = 0;

  abi_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic inst_t mk(input opcode_e op, input int s, input int lvl, input int bank,
                               input int ad, input int d);
    inst_t i = '0;
    i.op = op; i.cu = 4'(s); i.lvl = level_e'(lvl); i.bank = 5'(bank); i.addr = 18'(ad); i.data = d;
    return i;
  endfunction

  task automatic put(input inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    @(posedge clk);
    while (!inst_ready) @(posedge clk);
    #1 inst_valid = 0;
  endtask

  task automatic vmac(input int s, input int ad, output int res, output int cyc);
    inst_t i = mk(OP_VMAC, s, 0, 0, ad, 0);
    i.acc_clr = 1;
    put(i);
    cyc = 1;
    while (!done && cyc < 500) begin @(posedge clk); #1; cyc++; end
    res = result;
  endtask

  task automatic scan_in(input inst_t i);
    logic [INST_W-1:0] w = i;
    @(negedge clk); se = 1;
    for (int k = INST_W - 1; k >= 0; k--) begin si = w[k]; @(negedge clk); end
    se = 0; upd = 1; @(negedge clk); upd = 0;
  endtask

  int res, cyc, exp;
  logic [32:0] w;
  initial begin
    se = 0; si = 0; upd = 0; inst_valid = 0; inst = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // CU 7, near register file, through the scan chain
    for (int b = 0; b < 16; b++) begin
      scan_in(mk(OP_MEMWR, 7, LVL_RF, b, 8191, b < 8 ? 16'hffff : 0));
      scan_in(mk(OP_REGWR, 7, LVL_RF, b, 0, b < 8 ? 16'hffff : 0));
    end
    scan_in(mk(OP_PRWR, 7, 0, 0, PR_ST_DIS, 6'b110000));
    scan_in(mk(OP_PRWR, 7, 0, 0, PR_BW, 2));
    scan_in(mk(OP_PRWR, 7, 0, 0, PR_ACT, 1));
    begin
      inst_t i = mk(OP_VMAC, 7, 0, 0, 8191, 0);
      i.acc_clr = 1;
      scan_in(i);
    end
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    check("scan: RF result", result, 8);
    check("scan: RF latency after UPD", cyc, 3);   // 1 cycle for UPD capture + 2
    @(negedge clk); se = 1;
    for (int k = 32; k >= 0; k--) begin w[k] = so; @(negedge clk); end
    se = 0;
    check("SO word", w[31:0], 8);

    // CU 7, near L1
    for (int b = 0; b < 16; b++) begin
      put(mk(OP_MEMWR, 7, LVL_L1, b, 4095, b < 8 ? 16'hffff : 0));
      put(mk(OP_REGWR, 7, LVL_L1, b, 0, b < 8 ? 16'hffff : 0));
    end
    put(mk(OP_PRWR, 7, 0, 0, PR_NRF_M, LVL_L1));
    vmac(7, 4095, res, cyc);
    check("L1 result", res, 8);
    check("L1 latency", cyc, 4);

    // L2 slice
    exp = 0;
    for (int b = 0; b < 16; b++) begin
      put(mk(OP_MEMWR, 8, LVL_L2, b, 131071, 100 * b - 700));
      put(mk(OP_REGWR, 8, LVL_L2, b, 0, b + 1));
      exp += (100 * b - 700) * (b + 1);
    end
    put(mk(OP_PRWR, 8, 0, 0, PR_ST_DIS, 6'b110000));
    vmac(8, 131071, res, cyc);
    check("L2 result", res, exp);
    check("L2 latency", cyc, 10);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
