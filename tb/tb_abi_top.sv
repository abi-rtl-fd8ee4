// tb_abi_top: end-to-end test of the near-memory GPU additions (2 CU slices and
// the L2 slice, small memories).
//
// Workloads, each checked against numbers computed here or printed as the
// expected result of the example:
//  * the four single-operation examples measured on the test chip, sent through
//    the scan chain (SE/SI/UPD) and read back on SO: a 3x3 convolution window of
//    -1s (8), an Ising King's-graph field (-8), a Jacobi update scaled by
//    REG'' = 2 (4), a GCN / attention dot product scaled by 4 (2);
//  * attention: Q (4x3) times K (3x5) and the result times V (5x3), keys and
//    values in memory, query rows in the REGs, near-L1 in bit-serial mode, with
//    the 4x5 and 4x3 result tables of the worked example;
//  * the same Q.K run near L2, element-serial, and a softmax of one row;
//  * one Jacobi iteration of a 3x3 linear system (CA subtract, scale by 1/a_ii);
//  * a small GCN layer: two combination results written back into REGs by the
//    VMAC write-back, then aggregated with an adjacency row;
//  * a near-L1 result written back into a register-file word and read there by
//    an NRF operation.
// Mechanisms counted, each must occur: scan instruction, stall, sparsity gating,
// monitor shutdown, bit-serial, element-serial, softmax, ReLU, CA subtract,
// scaler, St4 multiply, op-disable, NRF / near-L1 / near-L2 operation,
// accumulation over several operations, result write-back into a REG and into
// the register file.
module tb_abi_top;
  import abi_pkg::*;
  localparam int NUM_CU = 2, NB = 16;

  logic clk = 0, rst_n = 0;
  logic se, si, upd, so, inst_valid, inst_ready, done, gt0, stall, spen_any;
  inst_t inst;
  logic signed [31:0] result;
  logic [NUM_CU:0] slice_busy, mon_en;
  int checks = 0, failures = 0;

  abi_top #(.NUM_CU(NUM_CU), .NB(NB), .RF_DEPTH(64), .L1_DEPTH(64), .L2_DEPTH(64)) dut (.*);

  always #5 clk = ~clk;

  // mechanism counters
  typedef enum int {M_SCAN, M_STALL, M_SPARSE, M_MONOFF, M_BS, M_ES, M_SM, M_RELU, M_SUB,
                    M_SCALE, M_ST4, M_OPDIS, M_NRF, M_L1, M_L2, M_ACC, M_WB, M_WBV, M_N} mech_e;
  int mech [M_N];
  string mname [M_N] = '{"scan", "stall", "sparsity gating", "monitor shutdown", "bit-serial",
                         "element-serial", "softmax", "relu", "CA subtract", "scaler", "St4 multiply",
                         "op disable", "NRF op", "near-L1 op", "near-L2 op", "multi-op accumulation",
                         "result write-back", "VRF write-back"};
  always @(posedge clk) begin
    if (stall) mech[M_STALL]++;
    if (spen_any) mech[M_SPARSE]++;
    if (rst_n && mon_en != '1) mech[M_MONOFF]++;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  // parallel port
  task automatic put(input inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    @(posedge clk);
    while (!inst_ready) @(posedge clk);
    #1 inst_valid = 0;
  endtask

  task automatic prw(input int s, input pr_addr_e a, input int d);
    put(mk(OP_PRWR, s, 0, 0, int'(a), d));
  endtask

  // VMAC on the parallel port, wait for the result
  task automatic vmac(input int s, input int ad, input logic clr, input logic [5:0] od,
                      output int res, output int cyc);
    inst_t i = mk(OP_VMAC, s, 0, 0, ad, 0);
    i.acc_clr = clr; i.op_dis = od;
    put(i);
    cyc = 1;
    while (!done && cyc < 500) begin @(posedge clk); #1; cyc++; end
    res = result;
  endtask

  // scan an instruction in, pulse UPD
  task automatic scan_in(input inst_t i);
    logic [INST_W-1:0] w = i;
    @(negedge clk); se = 1;
    for (int k = INST_W - 1; k >= 0; k--) begin si = w[k]; @(negedge clk); end
    se = 0; upd = 1; @(negedge clk); upd = 0;
    mech[M_SCAN]++;
  endtask

  // scan a VMAC in, wait for done, scan the result out on SO
  task automatic scan_vmac(input int s, input int ad, output int res);
    logic [32:0] w;
    inst_t i = mk(OP_VMAC, s, 0, 0, ad, 0);
    i.acc_clr = 1;
    scan_in(i);
    while (!done) @(posedge clk);
    @(negedge clk); se = 1;
    for (int k = 32; k >= 0; k--) begin w[k] = so; @(negedge clk); end
    se = 0;
    res = w[31:0];
  endtask

  int res, cyc, exp;
  int Q [4][3] = '{'{2,3,6}, '{2,0,4}, '{1,3,7}, '{0,4,2}};
  int K [3][5] = '{'{2,6,1,3,4}, '{1,0,7,0,2}, '{2,0,1,3,2}};
  int V [5][3] = '{'{2,0,1}, '{2,2,1}, '{8,5,1}, '{0,1,3}, '{3,4,1}};
  int IA [4][5] = '{'{19,12,29,24,26}, '{12,12,6,18,16}, '{19,6,29,24,24}, '{8,0,30,6,12}};
  int AT [4][3] = '{'{372,297,158}, '{144,136,100}, '{354,277,150}, '{292,204,68}};
  int C [3][3] = '{'{2,4,5}, '{7,4,1}, '{2,9,6}};
  int D [3] = '{10, 7, 5};
  int X [3] = '{1, 1, 1};

  initial begin
    se = 0; si = 0; upd = 0; inst_valid = 0; inst = '0;
    for (int m = 0; m < M_N; m++) mech[m] = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---------------- test-chip examples over the scan chain (slice 0, NRF) ----
    for (int b = 0; b < 8; b++) begin
      scan_in(mk(OP_MEMWR, 0, LVL_RF, b, 1, 16'hffff));
      scan_in(mk(OP_REGWR, 0, LVL_RF, b, 0, 16'hffff));
    end
    for (int b = 8; b < NB; b++) scan_in(mk(OP_REGWR, 0, LVL_RF, b, 0, 0));
    // CNN: St0-St3, CA, ReLU, no scaling (St4 and S disabled), 2-bit
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_ST_DIS, 6'b110000));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_BW, 2));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_ACT, 1));
    scan_vmac(0, 1, res); check("CNN window = 8", res, 8); mech[M_RELU]++; mech[M_NRF]++;
    // Ising: St1 off, 1-bit spins, no TH function, no scaling
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_ST_DIS, 6'b110010));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_BW, 1));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_ACT, 0));
    scan_vmac(0, 1, res); check("Ising field = -8", res, -8);
    // LP: scale by REG'' = 2, TH off
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_ST_DIS, 6'b010000));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_BW, 2));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_REG2, 2));
    scan_vmac(0, 1, res); check("LP update = 4", res, 4); mech[M_SCALE]++;
    // GCN / LLM: all on, scale by 4
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_REG2, 4));
    scan_in(mk(OP_PRWR, 0, 0, 0, PR_ACT, 1));
    scan_vmac(0, 1, res); check("GCN/LLM = 2", res, 2);

    // ---------------- attention near L1 of slice 1, bit-serial ----------------
    // key column c at address c, bank j = K[j][c]; value column c at 8+c
    for (int j = 0; j < 3; j++) for (int c = 0; c < 5; c++) put(mk(OP_MEMWR, 1, LVL_L1, j, c, K[j][c]));
    for (int r = 0; r < 5; r++) for (int c = 0; c < 3; c++) put(mk(OP_MEMWR, 1, LVL_L1, r, 8 + c, V[r][c]));
    prw(1, PR_NRF_M, LVL_L1);
    prw(1, PR_ST_DIS, 6'b110000);
    prw(1, PR_BEL, 2'b01);          // bit-serial, element-parallel
    prw(1, PR_BW, 8);
    prw(1, PR_ACT, 2);              // sparsity detection on
    prw(1, PR_SP_WIN, 40);
    for (int r = 0; r < 4; r++) begin
      for (int j = 0; j < NB; j++) put(mk(OP_REGWR, 1, LVL_L1, j, 0, j < 3 ? Q[r][j] : 0));
      for (int c = 0; c < 5; c++) begin
        vmac(1, c, 1, 0, res, cyc);
        check($sformatf("QK[%0d][%0d]", r, c), res, IA[r][c]);
        check("near-L1 bit-serial latency", cyc, 3 + 8);
        mech[M_BS]++; mech[M_L1]++;
      end
    end
    // attention x V: inter-attention row in REG (values up to 30)
    for (int r = 0; r < 4; r++) begin
      for (int j = 0; j < NB; j++) put(mk(OP_REGWR, 1, LVL_L1, j, 0, j < 5 ? IA[r][j] : 0));
      for (int c = 0; c < 3; c++) begin
        vmac(1, 8 + c, 1, 0, res, cyc);
        check($sformatf("AV[%0d][%0d]", r, c), res, AT[r][c]);
      end
    end
    // sparsity detection stays on while zeros keep arriving (unused banks hold 0)
    check("monitor keeps detection on", mon_en[1], 1);
    // dense data in every bank: after 41 monitored cycles without a zero the
    // monitor shuts detection off
    for (int j = 0; j < NB; j++) begin
      put(mk(OP_MEMWR, 1, LVL_L1, j, 20, j + 1));
      put(mk(OP_REGWR, 1, LVL_L1, j, 0, 2));
    end
    for (int t = 0; t < 6; t++) begin
      vmac(1, 20, 1, 0, res, cyc);
      check("dense dot product", res, 2 * NB * (NB + 1) / 2);
    end
    check("monitor shut detection off", mon_en[1], 0);

    // ---------------- Q.K near L2, element-serial, and a softmax --------------
    for (int j = 0; j < 3; j++) for (int c = 0; c < 5; c++) put(mk(OP_MEMWR, NUM_CU, LVL_L2, j, c, K[j][c]));
    prw(NUM_CU, PR_ST_DIS, 6'b110000);
    prw(NUM_CU, PR_BEL, 2'b10);     // bit-parallel, element-serial
    prw(NUM_CU, PR_BW, 8);
    for (int j = 0; j < NB; j++) put(mk(OP_REGWR, NUM_CU, LVL_L2, j, 0, j < 3 ? Q[3][j] : 0));
    for (int c = 0; c < 5; c++) begin
      vmac(NUM_CU, c, 1, 0, res, cyc);
      check("near-L2 element-serial Q.K", res, IA[3][c]);
      check("near-L2 element-serial latency", cyc, 9 + 1 + NB);
      mech[M_ES]++; mech[M_L2]++;
    end
    // softmax of row 3: build the running sum, then read each element against it
    prw(NUM_CU, PR_SM_CLR, 0);
    prw(NUM_CU, PR_ACT, 4'b1101);   // TH, SM, accumulate
    for (int c = 0; c < 5; c++) vmac(NUM_CU, c, 1, 0, res, cyc);
    prw(NUM_CU, PR_ACT, 4'b0101);   // TH, SM, read against the finished sum
    begin
      int sum = 0, p;
      for (int c = 0; c < 5; c++) sum += IA[3][c] + 1;   // 61: leading one at bit 5
      for (int c = 0; c < 5; c++) begin
        vmac(NUM_CU, c, 1, 0, res, cyc);
        p = 0; for (int k = 0; k < 8; k++) if ((IA[3][c] + 1) >> k & 1) p = k;
        check("softmax", res, 8'h80 >> (5 - p));
        mech[M_SM]++;
      end
    end

    // ---------------- Jacobi iteration on slice 0 (NRF), op-disable, St4 -------
    // row i: banks hold C[i][j] for j != i at address 16+i; REG = X; bias D[i]; REG'' = C[i][i]
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) put(mk(OP_MEMWR, 0, LVL_RF, j, 16 + i, i == j ? 0 : C[i][j]));
    for (int j = 0; j < NB; j++) put(mk(OP_REGWR, 0, LVL_RF, j, 0, j < 3 ? X[j] : 0));
    prw(0, PR_ST_DIS, 6'b010000);
    prw(0, PR_BW, 8);
    prw(0, PR_ACT, 0);
    prw(0, PR_CA_SUB, 1);
    for (int i = 0; i < 3; i++) begin
      automatic int s = 0;
      for (int j = 0; j < 3; j++) if (j != i) s += C[i][j] * X[j];
      prw(0, PR_CA_BIAS, D[i]);
      prw(0, PR_REG2, C[i][i]);
      vmac(0, 16 + i, 1, 0, res, cyc);
      check($sformatf("Jacobi x%0d", i), res, (D[i] - s) / C[i][i]);
      check("NRF latency", cyc, 2);
      mech[M_SUB]++; mech[M_NRF]++;
    end
    prw(0, PR_CA_SUB, 0);
    // St4: REG'' = 3 multiplies each bank result, scaler disabled per op (OP[5]DIS)
    prw(0, PR_ST_DIS, 6'b000000);
    prw(0, PR_REG2, 3);
    vmac(0, 16, 1, 6'b100000, res, cyc);
    check("St4 x3, scaler op-disabled", res, 3 * (C[0][1] + C[0][2]));
    mech[M_ST4]++; mech[M_OPDIS]++;
    // accumulation over two operations (St3 not cleared)
    prw(0, PR_ST_DIS, 6'b110000);
    vmac(0, 16, 1, 0, res, cyc);
    vmac(0, 17, 0, 0, res, cyc);
    check("two-op accumulation", res, C[0][1] + C[0][2] + C[1][0] + C[1][2]);
    mech[M_ACC]++;
    // GCN layer on slice 0: features h in REG 4..6, weight column k at address
    // 24+k; ReLU(h.W_k) is written back into REG k; the adjacency row (1, 1) at
    // address 30 in banks 0..1 then aggregates the two written-back values
    begin
      int H [3] = '{1, 2, 3};
      int W [2][3] = '{'{1, -1, 2}, '{2, 1, -1}};
      int hw [2], agg = 0;
      for (int j = 0; j < NB; j++) put(mk(OP_REGWR, 0, LVL_RF, j, 0, (j >= 4 && j < 7) ? H[j - 4] : 0));
      for (int k = 0; k < 2; k++)
        for (int j = 0; j < NB; j++) put(mk(OP_MEMWR, 0, LVL_RF, j, 24 + k, (j >= 4 && j < 7) ? W[k][j - 4] : 0));
      for (int j = 0; j < NB; j++) put(mk(OP_MEMWR, 0, LVL_RF, j, 30, j < 2 ? 1 : 0));
      prw(0, PR_ACT, 1);            // ReLU
      for (int k = 0; k < 2; k++) begin
        automatic inst_t i = mk(OP_VMAC, 0, 0, k, 24 + k, 1);  // data[0]: write back into REG[bank]
        hw[k] = 0;
        for (int j = 0; j < 3; j++) hw[k] += H[j] * W[k][j];
        if (hw[k] < 0) hw[k] = 0;
        agg += hw[k];
        i.acc_clr = 1;
        put(i);
        cyc = 1;
        while (!done && cyc < 500) begin @(posedge clk); #1; cyc++; end
        check($sformatf("GCN combination %0d", k), result, hw[k]);
        mech[M_WB]++;
      end
      vmac(0, 30, 1, 0, res, cyc);
      check("GCN aggregation of written-back REGs", res, agg);
      prw(0, PR_ACT, 0);
    end
    // near-L1 dense dot product on slice 1 written into VRF bank 3, word 40,
    // then read by an NRF operation with REG 3 = 1 (other RF REGs are 0)
    begin
      automatic inst_t i = mk(OP_VMAC, 1, 0, 3, 20, (40 << 14) | 2);
      i.acc_clr = 1;
      put(i);
      cyc = 1;
      while (!done && cyc < 500) begin @(posedge clk); #1; cyc++; end
      check("near-L1 result before write-back", result, 2 * NB * (NB + 1) / 2);
      mech[M_WBV]++;
      prw(1, PR_NRF_M, LVL_RF);
      put(mk(OP_REGWR, 1, LVL_RF, 3, 0, 1));
      vmac(1, 40, 1, 0, res, cyc);
      check("NRF reads the written-back VRF word", res, 2 * NB * (NB + 1) / 2);
      prw(1, PR_NRF_M, LVL_L1);
    end
    // stall: a PR write right behind a bit-serial L1 operation on slice 1
    @(negedge clk);
    inst = mk(OP_VMAC, 1, 0, 0, 0, 0); inst.acc_clr = 1; inst_valid = 1;
    @(negedge clk);
    inst = mk(OP_PRWR, 1, 0, 0, PR_BEL, 0);
    while (!inst_ready) @(negedge clk);
    @(negedge clk); inst_valid = 0;

    for (int m = 0; m < M_N; m++) begin
      $display("mechanism %-22s : %0d", mname[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin failures++; $display("FAIL mechanism never happened: %s", mname[m]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
