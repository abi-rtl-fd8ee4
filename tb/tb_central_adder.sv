// tb_central_adder: element-parallel sums, element-serial sums built one bank
// per step (with the other legs forced to zero), and the bias-minus-sum mode,
// against sums computed here.
module tb_central_adder;
  localparam int NB = 16;
  logic clk = 0, rst_n = 0;
  logic signed [31:0] s4 [NB];
  logic es, first, step, sub;
  logic [3:0] bank_sel;
  logic signed [31:0] bias, sum;
  int checks = 0, failures = 0;

  central_adder #(.NB(NB)) dut (.*);

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

  int ref_sum;
  initial begin
    es = 0; first = 1; step = 0; sub = 0; bank_sel = 0; bias = 0;
    for (int i = 0; i < NB; i++) s4[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      ref_sum = 0;
      for (int i = 0; i < NB; i++) begin s4[i] = $signed($urandom_range(0, 2000)) - 1000; ref_sum += s4[i]; end
      // EP
      es = 0; sub = 0; #1;
      check("EP sum", sum, ref_sum);
      bias = $signed($urandom_range(0, 5000)); sub = 1; #1;
      check("EP bias-sum", sum, bias - ref_sum);
      // ES: one bank per step
      es = 1; sub = 0;
      for (int i = 0; i < NB; i++) begin
        @(negedge clk);
        bank_sel = 4'(i); first = (i == 0); step = 1;
        #1;
        if (i == NB - 1) check("ES sum", sum, ref_sum);
      end
      @(negedge clk); step = 0;
    end
    // paper example: eight banks of (-1)*(-1) accumulate to 8
    es = 0; sub = 0;
    for (int i = 0; i < NB; i++) s4[i] = (i < 8) ? 1 : 0;
    #1; check("eight banks", sum, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
