// tb_threshold: ReLU with TH_ACT = 1, pass-through and the S > 0 comparison with
// TH_ACT = SM_ACT = 0, and the softmax path with SM_ACT = 1 (an input equal to
// the whole sum gives 1.0 = 0x80).
module tb_threshold;
  logic clk = 0, rst_n = 0;
  logic signed [31:0] s, out;
  logic th_act, sm_act, sm_acc, sm_commit, sm_clr, gt0;
  int checks = 0, failures = 0;

  threshold dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    th_act = 0; sm_act = 0; sm_acc = 0; sm_commit = 0; sm_clr = 0; s = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      s = $signed($urandom);
      th_act = 1; sm_act = 0; #1;
      check("relu", out, (s < 0) ? 0 : s);
      th_act = 0; #1;
      check("pass", out, s);
      check("gt0", gt0, s > 0);
    end
    s = 0; #1; check("gt0 of 0", gt0, 0);
    // softmax: sum empty, one element of value 6 (In1 = 7): 7/7 -> 1.0
    @(negedge clk); sm_clr = 1; @(negedge clk); sm_clr = 0;
    s = 6; th_act = 1; sm_act = 1; sm_acc = 1; #1;
    check("softmax single", out, 8'h80);
    sm_commit = 1; @(negedge clk); sm_commit = 0;
    // second element 56 (In1 = 57), sum 64: msb 6 vs 5 -> 0x40
    s = 56; #1;
    check("softmax second", out, 8'h40);
    // ReLU ahead of softmax: negative input gives In1 = 1; the sum holds 7 (msb 2)
    s = -9; sm_acc = 0; #1;
    check("relu then softmax", out, 8'h80 >> 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
