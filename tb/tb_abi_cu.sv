// tb_abi_cu: one compute-unit slice and one L2 slice driven by instructions.
//
// Programs the PRs, fills the register-file, L1 and L2 sub-banks and the REGs
// with OP_MEMWR / OP_REGWR, and runs VMACs with NRF_M choosing the level.
// Checks the results against dot products computed here, the 2 / 4 / 10 cycle
// latencies of NRF, near-L1 and near-L2 operations, that an instruction
// arriving while the slice is busy is stalled (not ready) and then accepted,
// and that instructions for another slice are ignored.  Last, the register-file
// write-back: a near-L1 result is written into a VRF word, a fill issued right
// behind it must wait one cycle (not be lost), and an NRF operation reads the
// written-back word.
module tb_abi_cu;
  import abi_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  inst_t inst;
  logic inst_valid;
  logic rdy_c, stall_c, busy_c, done_c, gt0_c, spen_c, mon_c;
  logic rdy_2, stall_2, busy_2, done_2, gt0_2, spen_2, mon_2;
  logic signed [31:0] res_c, res_2;
  pr_t pr_c, pr_2;
  int checks = 0, failures = 0, stalls = 0;

  abi_cu #(.SLICE_ID(1), .L2_SLICE(1'b0), .NB(NB), .RF_DEPTH(16), .L1_DEPTH(16), .L2_DEPTH(16)) cu (
    .clk, .rst_n, .inst, .inst_valid, .inst_ready(rdy_c), .stall(stall_c), .busy(busy_c),
    .done(done_c), .result(res_c), .gt0(gt0_c), .spen_any(spen_c), .mon_en(mon_c), .pr(pr_c));
  abi_cu #(.SLICE_ID(2), .L2_SLICE(1'b1), .NB(NB), .RF_DEPTH(16), .L1_DEPTH(16), .L2_DEPTH(16)) l2 (
    .clk, .rst_n, .inst, .inst_valid, .inst_ready(rdy_2), .stall(stall_2), .busy(busy_2),
    .done(done_2), .result(res_2), .gt0(gt0_2), .spen_any(spen_2), .mon_en(mon_2), .pr(pr_2));

  always #5 clk = ~clk;
  always @(posedge clk) if (stall_c) stalls++;
  // the slice's result is valid with done: keep the last one
  int last_c = 0;
  always @(posedge clk) if (done_c) last_c <= res_c;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // issue one instruction, waiting while not ready
  task automatic issue(input opcode_e op, input int cu_id, input level_e lvl, input int bank,
                       input int ad, input logic [31:0] d, input logic clr);
    @(negedge clk);
    inst = '0; inst.op = op; inst.cu = 4'(cu_id); inst.lvl = lvl; inst.bank = 5'(bank);
    inst.addr = 18'(ad); inst.data = d; inst.acc_clr = clr;
    inst_valid = 1;
    while (!(rdy_c && rdy_2)) @(negedge clk);
    @(negedge clk);
    inst_valid = 0;
  endtask

  task automatic vmac(input int cu_id, input int ad, output int cyc, output int res);
    @(negedge clk);
    inst = '0; inst.op = OP_VMAC; inst.cu = 4'(cu_id); inst.addr = 18'(ad); inst.acc_clr = 1;
    inst_valid = 1;
    @(posedge clk); #1; inst_valid = 0; cyc = 1;
    while (!(done_c || done_2) && cyc < 100) begin @(posedge clk); #1; cyc++; end
    res = done_c ? res_c : res_2;
  endtask

  int a [3][NB];
  int q [3][NB];
  int cyc, res, exp;
  initial begin
    inst = '0; inst_valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // both slices: 8-bit, St4 and S off
    for (int s = 1; s <= 2; s++) begin
      issue(OP_PRWR, s, LVL_RF, 0, PR_ST_DIS, 32'h30, 0);
      issue(OP_PRWR, s, LVL_RF, 0, PR_BW, 8, 0);
    end
    for (int l = 0; l < 3; l++) for (int b = 0; b < NB; b++) begin
      a[l][b] = $urandom_range(0, 200) - 100;
      q[l][b] = $urandom_range(0, 200) - 100;
      issue(OP_MEMWR, l == 2 ? 2 : 1, level_e'(l), b, 3, 32'(a[l][b]), 0);
      issue(OP_REGWR, l == 2 ? 2 : 1, level_e'(l), b, 0, 32'(q[l][b]), 0);
    end
    // instruction for slice 5: ignored
    issue(OP_PRWR, 5, LVL_RF, 0, PR_BW, 3, 0);
    check("other slice ignored", pr_c.bit_wid, 8);
    for (int l = 0; l < 3; l++) begin
      exp = 0;
      for (int b = 0; b < NB; b++) exp += a[l][b] * q[l][b];
      if (l < 2) issue(OP_PRWR, 1, LVL_RF, 0, PR_NRF_M, l, 0);
      vmac(l == 2 ? 2 : 1, 3, cyc, res);
      check("dot product", res, exp);
      check("latency", cyc, l == 0 ? 2 : (l == 1 ? 4 : 10));
    end
    // stall: a second instruction while the L1 operation runs
    issue(OP_PRWR, 1, LVL_RF, 0, PR_NRF_M, 1, 0);
    @(negedge clk);
    inst = '0; inst.op = OP_VMAC; inst.cu = 1; inst.addr = 3; inst.acc_clr = 1; inst_valid = 1;
    @(negedge clk);
    inst.op = OP_PRWR; inst.addr = 18'(PR_BW); inst.data = 4;
    check("not ready while busy", rdy_c, 0);
    while (!rdy_c) @(negedge clk);
    @(negedge clk); inst_valid = 0;
    check("stalled cycles", stalls, 3);
    check("accepted after stall", pr_c.bit_wid, 4);

    // register-file write-back: L1 dot product -> VRF bank 2, word 9
    issue(OP_PRWR, 1, LVL_RF, 0, PR_BW, 8, 0);
    exp = 0;
    for (int b = 0; b < NB; b++) exp += a[1][b] * q[1][b];
    @(negedge clk);
    inst = '0; inst.op = OP_VMAC; inst.cu = 1; inst.addr = 3; inst.acc_clr = 1; inst.bank = 2;
    inst.data = (32'd9 << 14) | 32'd2;   // data[1]: VRF write-back, word 9
    inst_valid = 1;
    @(negedge clk);
    // a fill of VRF bank 0 word 9 right behind: accepted only after the write-back
    inst = '0; inst.op = OP_MEMWR; inst.cu = 1; inst.lvl = LVL_RF; inst.bank = 0; inst.addr = 9;
    inst.data = 32'd5;
    cyc = 0;
    while (!rdy_c) begin @(negedge clk); cyc++; end
    check("fill waits through the write-back cycle", done_c, 0);
    @(negedge clk); inst_valid = 0;
    check("L1 result seen", last_c, exp);
    // read VRF word 9: REG = 1 in bank 2, 0 elsewhere; bank 0 holds 5 but REG 0 = 0
    issue(OP_PRWR, 1, LVL_RF, 0, PR_NRF_M, 0, 0);
    issue(OP_PRWR, 1, LVL_RF, 0, PR_BW, 16, 0);
    for (int b = 0; b < NB; b++) issue(OP_REGWR, 1, LVL_RF, b, 0, (b == 2) ? 1 : ((b == 0) ? 1 : 0), 0);
    vmac(1, 9, cyc, res);
    check("written-back word read by NRF (+ fill of 5)", res, (exp > 32767 ? 32767 : (exp < -32768 ? -32768 : exp)) + 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
