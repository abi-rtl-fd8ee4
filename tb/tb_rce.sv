// tb_rce: self-checking test of the reconfigurable compute engine.
//
// Random 16-bit words and REG values are multiplied in bit-parallel and in
// bit-serial mode at random widths BIT_WID and accumulated over several
// elements; the results are compared with a*q computed here in integer
// arithmetic (q read as a BIT_WID-bit two's-complement number).  Also checked:
// the St4 multiply by REG'', the St0 and St1 bypasses, the St3 bypass, the
// sparsity gate holding St3, and that bit-serial mode takes BIT_WID cycles.
module tb_rce;
  import abi_pkg::*;

  logic clk = 0, rst_n = 0;
  logic signed [15:0] a, reg2;
  logic [15:0] q;
  logic [4:0] bw, se;
  logic [3:0] bit_idx;
  logic bs, spen, step, commit, acc_clr;
  logic signed [31:0] s3, s4, s4_reg;
  int checks = 0, failures = 0;

  rce dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sx(input logic [15:0] v, input int w);
    longint r = 0;
    for (int k = 0; k < w; k++) if (v[k]) r += (k == w - 1) ? -(longint'(1) << k) : (longint'(1) << k);
    return r;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // one element in BP mode (1 cycle) or BS mode (bw cycles); returns cycles used
  task automatic element(input logic clr, output int cycles);
    cycles = 0;
    acc_clr = clr;
    if (!bs) begin
      commit = 1; step = 0; bit_idx = 0;
      @(posedge clk); #1; cycles = 1;
      commit = 0;
    end else begin
      for (int k = 0; k < int'(bw); k++) begin
        bit_idx = 4'(k); step = 1; commit = (k == int'(bw) - 1);
        @(posedge clk); #1; cycles++;
      end
      step = 0; commit = 0;
    end
    acc_clr = 0;
  endtask

  longint acc, exp;
  int cyc;

  initial begin
    a = 0; q = 0; bw = 8; se = 5'b10000; reg2 = 1; bit_idx = 0;
    bs = 0; spen = 0; step = 0; commit = 0; acc_clr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // bit-parallel and bit-serial dot products, St4 bypassed
    for (int mode = 0; mode < 2; mode++) begin
      bs = 1'(mode);
      for (int t = 0; t < 40; t++) begin
        bw = 5'($urandom_range(1, 16));
        acc = 0;
        for (int e = 0; e < 4; e++) begin
          a = 16'($urandom); q = 16'($urandom);
          exp = longint'(a) * sx(q, int'(bw));
          acc += exp;
          element(e == 0, cyc);
          check(mode ? "BS cycles" : "BP cycles", cyc, mode ? int'(bw) : 1);
          check(mode ? "BS St3 sum" : "BP St3 sum", longint'(s4_reg), longint'(int'(acc)));
        end
      end
    end

    // paper example: (-1)*(-1) with 2-bit REG
    bs = 0; bw = 2; a = -16'sd1; q = 16'hffff; #1;
    acc_clr = 1; #1;
    check("(-1)*(-1)", s3, 1);
    acc_clr = 0;

    // St4: multiply by REG''
    bs = 0; se = 5'b00000; bw = 8; a = 16'sd7; q = 16'd5; reg2 = -16'sd3; acc_clr = 1; #1;
    check("St4 multiply", s4, -105);
    // St3 bypass: no accumulation
    se = 5'b11000; #1;
    check("St3 bypass", s3, 35);
    // St0 bypass: word passes unmultiplied
    se = 5'b10001; acc_clr = 1; a = -16'sd42; q = 16'd9; #1;
    check("St0 bypass", s3, -42);
    // St1 bypass: only REG bit 0, unshifted and unsigned
    se = 5'b10010; q = 16'hffff; a = -16'sd1; #1;
    check("St1 bypass bit0=1", s3, -1);
    q = 16'hfffe; #1;
    check("St1 bypass bit0=0", s3, 0);
    acc_clr = 0;

    // sparsity gate: St3 holds, contributes zero
    se = 5'b10000; bs = 0; bw = 8; a = 16'sd3; q = 16'd4;
    element(1, cyc);
    check("before gate", s4_reg, 12);
    spen = 1; a = 16'sd0;
    element(0, cyc);
    check("gated hold", s4_reg, 12);
    spen = 0; a = 16'sd2;
    element(0, cyc);
    check("after gate", s4_reg, 20);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
