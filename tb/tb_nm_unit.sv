// tb_nm_unit: one NM/NRF unit with 8 sub-banks, end to end.
//
// The banks are filled with random words, the REGs with random values, and
// VMAC operations are run under random configurations (bit-parallel or
// bit-serial, element-parallel or element-serial, random BIT_WID, random stage
// and op disables, REG'', CA subtract, ReLU).  Each result is compared with a
// model written here from the definitions (a*q as integers, sums, division),
// and each operation's cycle count with RD_LAT + (1 or BIT_WID) (+ NB if
// element-serial).  Then the paper's 8-bank examples (CNN 8, Ising -8, LP 4,
// GCN/LLM 2), sparsity gating, the monitor shutdown and the softmax path.
// Last, a GCN layer through the write-back path: combination results are
// written into REGs (wb_en) and then multiplied with an adjacency row, and a
// result too large for a REG is saturated to 32767.
module tb_nm_unit;
  import abi_pkg::*;
  localparam int NB = 8, DEPTH = 16, RD_LAT = 1;

  logic clk = 0, rst_n = 0;
  pr_t pr;
  logic sp_arm, sm_clr, sp_off;
  logic mem_we, reg_we, start, acc_clr, busy, done, gt0, spen_any, mon_en;
  logic [2:0] mem_bank, reg_bank, wb_bank;
  logic wb_en;
  logic [3:0] mem_addr, addr;
  logic [15:0] mem_wdata, reg_wdata;
  logic [5:0] op_dis;
  logic signed [31:0] result;
  int checks = 0, failures = 0;
  int spen_cycles = 0, spoff_seen = 0;

  nm_unit #(.NB(NB), .DEPTH(DEPTH), .RD_LAT(RD_LAT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (spen_any && busy) spen_cycles++;
    if (sp_off) spoff_seen++;
  end

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

  logic [15:0] mem_m [NB][DEPTH];
  logic [15:0] reg_m [NB];
  int          st3_m [NB];

  function automatic longint sx(input logic [15:0] v, input int w);
    longint r = 0;
    for (int k = 0; k < w; k++) if (v[k]) r += (k == w - 1) ? -(longint'(1) << k) : (longint'(1) << k);
    return r;
  endfunction

  task automatic fill_mem(input int b, input int a, input logic [15:0] d);
    @(negedge clk); mem_we = 1; mem_bank = 3'(b); mem_addr = 4'(a); mem_wdata = d;
    @(negedge clk); mem_we = 0;
    mem_m[b][a] = d;
  endtask

  task automatic set_reg(input int b, input logic [15:0] d);
    @(negedge clk); reg_we = 1; reg_bank = 3'(b); reg_wdata = d;
    @(negedge clk); reg_we = 0;
    reg_m[b] = d;
  endtask

  // model of one VMAC; updates st3_m
  function automatic int model(input int ad, input logic clr, input logic [5:0] od);
    logic [5:0] se = od | pr.st_dis;
    int sum = 0, v;
    for (int b = 0; b < NB; b++) begin
      int p;
      logic signed [15:0] a = mem_m[b][ad];
      if (se[0])      p = a;
      else if (se[1]) p = reg_m[b][0] ? a : 0;
      else            p = int'(longint'(a) * sx(reg_m[b], int'(pr.bit_wid)));
      if (se[3]) st3_m[b] = p;
      else       st3_m[b] = (clr ? 0 : st3_m[b]) + p;
      sum += se[4] ? st3_m[b] : st3_m[b] * int'(pr.reg2);
    end
    if (pr.ca_sub) sum = pr.ca_bias - sum;
    if (!se[5] && pr.reg2 != 0) sum = sum / int'(pr.reg2);
    v = (pr.th_act && sum < 0) ? 0 : sum;
    return v;
  endfunction

  task automatic run_op(input int ad, input logic clr, input logic [5:0] od, output int cyc);
    @(negedge clk);
    start = 1; addr = 4'(ad); acc_clr = clr; op_dis = od;
    @(posedge clk); #1; start = 0; cyc = 1;
    while (!done && cyc < 200) begin @(posedge clk); #1; cyc++; end
  endtask

  int cyc, exp;
  initial begin
    pr = PR_RESET; pr.st_dis = 6'b110000; // St4 and S off
    sp_arm = 0; sm_clr = 0; mem_we = 0; reg_we = 0; start = 0; acc_clr = 0;
    wb_en = 0; wb_bank = 0;
    mem_bank = 0; reg_bank = 0; mem_addr = 0; addr = 0; mem_wdata = 0; reg_wdata = 0; op_dis = 0;
    for (int b = 0; b < NB; b++) st3_m[b] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) for (int a = 0; a < DEPTH; a++) fill_mem(b, a, 16'($urandom));
    for (int b = 0; b < NB; b++) set_reg(b, 16'($urandom));

    // random configurations
    for (int t = 0; t < 150; t++) begin
      logic clr = (t == 0) || ($urandom_range(0, 2) == 0);
      logic [5:0] od = ($urandom_range(0, 3) == 0) ? 6'($urandom) : 6'b0;
      int ad = $urandom_range(0, DEPTH - 1);
      pr.bit_elser = 2'($urandom);
      pr.bit_wid   = 5'($urandom_range(1, 16));
      pr.st_dis    = 6'b110000 & 6'($urandom);
      pr.reg2      = 16'($urandom_range(1, 9));
      pr.ca_sub    = 1'($urandom);
      pr.ca_bias   = $urandom_range(0, 1000);
      pr.th_act    = 1'($urandom);
      if (t % 10 == 0) set_reg($urandom_range(0, NB - 1), 16'($urandom));
      exp = model(ad, clr, od);
      run_op(ad, clr, od, cyc);
      check("random result", result, exp);
      check("random cycles", cyc, RD_LAT + (pr.bit_elser[0] ? int'(pr.bit_wid) : 1) + (pr.bit_elser[1] ? NB : 0));
    end

    // paper examples: eight banks, word -1 in memory, -1 in REG
    pr = PR_RESET;
    for (int b = 0; b < NB; b++) begin fill_mem(b, 5, 16'hffff); set_reg(b, 16'hffff); end
    // CNN: St0-St3, CA, no S, ReLU -> 8 (2 cycles)
    pr.st_dis = 6'b110000; pr.bit_wid = 2; pr.th_act = 1;
    run_op(5, 1, 0, cyc); check("CNN 8", result, 8); check("CNN 2 cycles", cyc, 2);
    // Ising: St1 off, 1-bit spins, no S -> -8
    pr.st_dis = 6'b110010; pr.bit_wid = 1; pr.th_act = 0;
    run_op(5, 1, 0, cyc); check("Ising -8", result, -8); check("Ising gt0", gt0, 0);
    // LP: S divides by REG'' = 2 -> 4
    pr.st_dis = 6'b010000; pr.bit_wid = 2; pr.reg2 = 2;
    run_op(5, 1, 0, cyc); check("LP 4", result, 4);
    // GCN / LLM: scale 4 -> 2
    pr.reg2 = 4; pr.th_act = 1;
    run_op(5, 1, 0, cyc); check("GCN/LLM 2", result, 2);

    // sparsity: zero REG in half the banks, detection on
    pr = PR_RESET; pr.st_dis = 6'b110000; pr.sp_act = 1; pr.sp_win = 16'd3;
    @(negedge clk); sp_arm = 1; @(negedge clk); sp_arm = 0;
    for (int b = 0; b < NB; b += 2) set_reg(b, 16'h0);
    spen_cycles = 0;
    exp = model(5, 1, 0); run_op(5, 1, 0, cyc);
    check("sparse result", result, exp);
    check("sparsity gated", spen_cycles > 0, 1);
    // no zeros: after 4 monitored cycles detection shuts off
    for (int b = 0; b < NB; b++) set_reg(b, 16'h3);
    for (int i = 0; i < 5; i++) begin exp = model(5, 1, 0); run_op(5, 1, 0, cyc); check("dense result", result, exp); end
    check("monitor shut off", mon_en, 0);
    check("sp_off pulsed", spoff_seen, 1);

    // softmax: two values 6 and 56 -> 1.0 then 0.5 against the running sum
    pr = PR_RESET; pr.st_dis = 6'b110001; pr.sm_act = 1; pr.sm_acc = 1; pr.bit_wid = 8;
    @(negedge clk); sm_clr = 1; @(negedge clk); sm_clr = 0;
    for (int b = 0; b < NB; b++) fill_mem(b, 7, 16'(b == 0 ? 6 : 0));
    run_op(7, 1, 0, cyc); check("softmax 1.0", result, 8'h80);
    for (int b = 0; b < NB; b++) fill_mem(b, 8, 16'(b == 0 ? 56 : 0));
    run_op(8, 1, 0, cyc); check("softmax 0.5", result, 8'h40);

    // GCN layer: combination in banks 4..7 (features in their REGs, weights in
    // memory), results written back into REG 0..3, then aggregation with an
    // adjacency row held in banks 0..3
    pr = PR_RESET; pr.st_dis = 6'b010000; pr.reg2 = 16'sd2; pr.th_act = 1; pr.bit_wid = 8;
    for (int b = 4; b < NB; b++) set_reg(b, 16'($urandom_range(0, 15)) - 16'd7);
    for (int k = 0; k < 4; k++) begin
      for (int b = 0; b < NB; b++) fill_mem(b, 9 + k, (b < 4) ? 16'd0 : 16'($urandom_range(0, 15)) - 16'd7);
      exp = model(9 + k, 1, 0);
      wb_en = 1; wb_bank = 3'(k);
      run_op(9 + k, 1, 0, cyc);
      wb_en = 0;
      check("GCN combination", result, exp);
      reg_m[k] = 16'(exp);
    end
    pr = PR_RESET; pr.st_dis = 6'b110000; pr.bit_wid = 16;
    for (int b = 0; b < NB; b++) fill_mem(b, 13, (b < 4) ? 16'($urandom_range(0, 1)) : 16'd0);
    fill_mem(0, 13, 16'd1);
    exp = model(13, 1, 0);
    run_op(13, 1, 0, cyc);
    check("GCN aggregation over written-back REGs", result, exp);
    check("aggregation non-trivial", exp != 0 || reg_m[0] == 0, 1);

    // write-back saturation: 300 * 200 = 60000 -> REG 1 holds 32767
    set_reg(0, 16'd200);
    for (int b = 0; b < NB; b++) fill_mem(b, 14, (b == 0) ? 16'd300 : 16'd0);
    wb_en = 1; wb_bank = 3'd1;
    run_op(14, 1, 0, cyc);
    wb_en = 0;
    check("pre-saturation result", result, 60000);
    for (int b = 0; b < NB; b++) fill_mem(b, 15, (b == 1) ? 16'd1 : 16'd0);
    run_op(15, 1, 0, cyc);
    check("saturated write-back", result, 32767);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
