// tb_nm_bank: writes random words and reads them back, for read latencies 1 and
// 3, checking that the word appears exactly RD_LAT edges after the request and
// then stays.
module tb_nm_bank;
  logic clk = 0;
  logic we1, re1, we3, re3;
  logic [5:0] wa1, ra1, wa3, ra3;
  logic [15:0] wd1, rd1, wd3, rd3;
  int checks = 0, failures = 0;
  logic [15:0] model [64];

  nm_bank #(.DEPTH(64), .DWID(16), .RD_LAT(1)) d1 (.clk, .we(we1), .waddr(wa1), .wdata(wd1), .re(re1), .raddr(ra1), .rdata(rd1));
  nm_bank #(.DEPTH(64), .DWID(16), .RD_LAT(3)) d3 (.clk, .we(we3), .waddr(wa3), .wdata(wd3), .re(re3), .raddr(ra3), .rdata(rd3));

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
    we1 = 0; re1 = 0; we3 = 0; re3 = 0; wa1 = 0; wa3 = 0; ra1 = 0; ra3 = 0; wd1 = 0; wd3 = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      model[i] = 16'($urandom);
      we1 = 1; we3 = 1; wa1 = 6'(i); wa3 = 6'(i); wd1 = model[i]; wd3 = model[i];
    end
    @(negedge clk); we1 = 0; we3 = 0;
    for (int t = 0; t < 50; t++) begin
      int a = $urandom_range(0, 63);
      re1 = 1; re3 = 1; ra1 = 6'(a); ra3 = 6'(a);
      @(negedge clk); re1 = 0; re3 = 0;
      check("lat1", rd1, model[a]);
      @(negedge clk);
      @(negedge clk);
      check("lat3", rd3, model[a]);
      @(negedge clk);
      check("lat1 held", rd1, model[a]);
      check("lat3 held", rd3, model[a]);
    end
    // latency 3: not yet after 2 edges
    re3 = 1; ra3 = 0; @(negedge clk); re3 = 0; @(negedge clk); @(negedge clk);
    re3 = 1; ra3 = 1; @(negedge clk); re3 = 0; @(negedge clk);
    check("lat3 not early", rd3, model[0]);
    @(negedge clk);
    check("lat3 on time", rd3, model[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
