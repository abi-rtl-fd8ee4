// tb_sparsity_monitor: the monitor must shut detection off after exactly
// SP_WIN+1 monitored cycles without SpEn (8 for a short window, 512 for the
// default), must not do so while SpEn keeps arriving or while idle, must pulse
// sp_off once, and must re-arm when SP_ACT is written.
module tb_sparsity_monitor;
  logic clk = 0, rst_n = 0;
  logic sp_act, arm, active, any_spen, mon_en, sp_off;
  logic [15:0] win, sp_cnt;
  int checks = 0, failures = 0, offs = 0;

  sparsity_monitor dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (sp_off) offs++;

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

  // run monitored cycles without SpEn until mon_en falls; return the count
  task automatic run_quiet(output int n);
    n = 0;
    active = 1; any_spen = 0;
    while (mon_en && n < 70000) begin @(posedge clk); #1; n++; end
    active = 0;
    @(posedge clk); #1;
  endtask

  int n;
  initial begin
    sp_act = 1; arm = 0; active = 0; any_spen = 0; win = 16'd7;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    check("mon_en after reset", mon_en, 1);
    run_quiet(n);
    check("short window", n, 8);
    check("sp_off pulses", offs, 1);
    // re-arm
    arm = 1; @(posedge clk); #1; arm = 0;
    check("re-armed", mon_en, 1);
    // SpEn every 5th cycle keeps it alive
    active = 1;
    for (int i = 0; i < 60; i++) begin any_spen = (i % 5 == 4); @(posedge clk); #1; end
    check("alive with sparsity", mon_en, 1);
    // idle cycles do not count
    active = 0; any_spen = 0;
    repeat (40) @(posedge clk); #1;
    check("idle not counted", mon_en, 1);
    // default window: 512
    win = 16'd511; arm = 1; @(posedge clk); #1; arm = 0;
    run_quiet(n);
    check("default window", n, 512);
    check("sp_off pulses 2", offs, 2);
    // sp_act off: never shuts down
    arm = 1; @(posedge clk); #1; arm = 0; sp_act = 0; win = 16'd3; active = 1;
    repeat (20) @(posedge clk); #1;
    check("sp_act off", mon_en, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
